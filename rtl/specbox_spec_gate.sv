// specbox_spec_gate: holds back speculative operations whose side effects
// could not be hidden by the cache domains, until they are no longer
// speculative.
//
// Three kinds of operation are held: cache-management instructions
// (software prefetch, clflush, INVD), memory operations that would change
// the coherence state of another core's copy (a load that turns an
// Exclusive copy Shared, a store that invalidates copies), and memory
// operations that missed in the TLB or paging cache. Such an operation
// waits in the gate until it is the oldest instruction in the ROB (its sn
// equals the ROB head's), which is the point where it can no longer be
// squashed. All other operations pass straight through in the same cycle.
// A flush (squash of the held operation's path) empties the gate.
//
// Interface: in valid/ready with sn and kind; out valid/ready with the
// same fields; rob_head_valid/rob_head_sn from the ROB. One operation is
// held at a time; stall_o is high in each cycle one is held and not
// released.
//
// From the design description: which operations are delayed and that they
// wait until commit. Classifying an operation (knowing it would change
// another core's coherence state, or that it missed in the TLB) is the
// core's and the directory's job; the gate receives the kind. The single
// holding slot is this design's own choice.
module specbox_spec_gate
  import specbox_pkg::*;
#(
  parameter int unsigned ROB_ENTRIES = 192,
  localparam int unsigned SN_W       = $clog2(ROB_ENTRIES)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            enable,        // protection on
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [SN_W-1:0] in_sn,
  input  spec_kind_e      in_kind,
  input  logic            rob_head_valid,
  input  logic [SN_W-1:0] rob_head_sn,
  input  logic            flush,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [SN_W-1:0] out_sn,
  output spec_kind_e      out_kind,
  output logic            stall_o,
  output logic            hold_o         // an operation entered the gate
);

  logic            held_q;
  logic [SN_W-1:0] sn_q;
  spec_kind_e      kind_q;
  logic            release_q;

  assign release_q = held_q && rob_head_valid && rob_head_sn == sn_q;

  always_comb begin
    out_valid = 1'b0;
    out_sn    = in_sn;
    out_kind  = in_kind;
    in_ready  = 1'b0;
    hold_o    = 1'b0;
    if (held_q) begin
      out_valid = release_q;
      out_sn    = sn_q;
      out_kind  = kind_q;
    end else if (in_valid && (in_kind == KIND_NORMAL || !enable)) begin
      out_valid = 1'b1;
      in_ready  = out_ready;
    end else begin
      in_ready  = 1'b1;
      hold_o    = in_valid;
    end
    stall_o = held_q && !(release_q && out_ready);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held_q <= 1'b0;
      sn_q   <= '0;
      kind_q <= KIND_NORMAL;
    end else if (flush) begin
      held_q <= 1'b0;
    end else if (held_q) begin
      if (release_q && out_ready) held_q <= 1'b0;
    end else if (hold_o) begin
      held_q <= 1'b1;
      sn_q   <= in_sn;
      kind_q <= in_kind;
    end
  end

endmodule

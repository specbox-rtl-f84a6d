// specbox_notifier: commit-stage unit that tells the caches when in-flight
// operations become committed or squashed.
//
// Loads and stores. When the ROB commits or squashes a memory instruction
// it hands the notifier the instruction's sequence number (sn). The
// notifier reads the LSQ entry at that sn, in the same cycle, for the
// line address and the dhit_mask (bit 0: the access hit in L1, bit 1: in
// L2), and emits one commit or squash notification for the L1-D. The
// notification asks the L1 to forward it to the L2 when the access missed
// in L1 (dhit_mask[0] = 0), because only then did it reach the L2.
//
// Instruction fetch. When the execution unit resolves a branch (br) and
// accepts or rejects its prediction, the notifier asks the fetch queue and
// the ROB for every instruction fetched under that branch. They answer
// with a stream of (line address, ihit_mask) beats, the last one flagged,
// one per cycle under valid/ready. Each beat becomes a commit (prediction
// accepted) or squash (rejected) notification for the L1-I. Runs of beats
// for one line are merged afterwards by the NFB.
//
// While protection of a side is off (its domain_cap is 0) the notifier
// drops that side's notifications.
//
// Interface timing: rob_ready and br_ready are the handshakes back to the
// core; each notification output is a register under valid/ready, so a
// notification leaves one cycle after its event.
//
// From the design description: the sn, br, mem_addr/dhit_mask and
// pc/ihit_mask exchanges and the forwarding filter. This design's own
// choices: one ROB event per cycle, the streaming FQ/ROB lookup, one branch
// walk at a time, and the 8-bit branch tag.
module specbox_notifier
  import specbox_pkg::*;
#(
  parameter int unsigned ROB_ENTRIES = 192,
  parameter int unsigned BR_W        = 8,
  localparam int unsigned SN_W       = $clog2(ROB_ENTRIES)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             d_en,          // L1-D domain_cap != 0
  input  logic             i_en,          // L1-I domain_cap != 0
  // ROB: a load/store commits or is squashed
  input  logic             rob_valid,
  output logic             rob_ready,
  input  logic             rob_commit,    // 1 commit, 0 squash
  input  logic [SN_W-1:0]  rob_sn,
  input  tid_t             rob_tid,
  // LSQ lookup by sn (combinational)
  output logic [SN_W-1:0]  lsq_sn,
  input  line_addr_t       lsq_line,
  input  hit_mask_t        lsq_dhit_mask,
  // EU: a branch is resolved
  input  logic             br_valid,
  output logic             br_ready,
  input  logic             br_accept,     // 1 prediction accepted, 0 rejected
  input  logic [BR_W-1:0]  br_id,
  input  tid_t             br_tid,
  // FQ/ROB lookup of the instructions fetched under a branch
  output logic             fl_req,
  output logic [BR_W-1:0]  fl_br,
  input  logic             fl_valid,
  output logic             fl_ready,
  input  line_addr_t       fl_line,
  input  hit_mask_t        fl_ihit_mask,
  input  logic             fl_last,
  // Notifier Bus
  output logic             d_valid,
  input  logic             d_ready,
  output cache_req_t       d_req,
  output logic             i_valid,
  input  logic             i_ready,
  output cache_req_t       i_req
);

  // ------------------------------------------------------------ loads/stores
  assign lsq_sn    = rob_sn;
  assign rob_ready = !d_valid || d_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_valid <= 1'b0;
      d_req   <= '0;
    end else begin
      if (d_valid && d_ready) d_valid <= 1'b0;
      if (rob_valid && rob_ready && d_en) begin
        d_valid    <= 1'b1;
        d_req.op   <= rob_commit ? OP_COMMIT : OP_SQUASH;
        d_req.line <= lsq_line;
        d_req.tid  <= rob_tid;
        d_req.fwd  <= !lsq_dhit_mask[0];
        d_req.src  <= '0;
      end
    end
  end

  // ------------------------------------------------------------ instruction fetch
  logic            walk_q;
  logic            acc_q;
  logic [BR_W-1:0] br_q;
  tid_t            btid_q;

  assign br_ready = !walk_q;
  assign fl_req   = walk_q;
  assign fl_br    = br_q;
  assign fl_ready = walk_q && (!i_valid || i_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      walk_q  <= 1'b0;
      acc_q   <= 1'b0;
      br_q    <= '0;
      btid_q  <= '0;
      i_valid <= 1'b0;
      i_req   <= '0;
    end else begin
      if (i_valid && i_ready) i_valid <= 1'b0;
      if (!walk_q) begin
        if (br_valid && i_en) begin
          walk_q <= 1'b1;
          acc_q  <= br_accept;
          br_q   <= br_id;
          btid_q <= br_tid;
        end
      end else if (fl_valid && fl_ready) begin
        i_valid    <= 1'b1;
        i_req.op   <= acc_q ? OP_COMMIT : OP_SQUASH;
        i_req.line <= fl_line;
        i_req.tid  <= btid_q;
        i_req.fwd  <= !fl_ihit_mask[0];
        i_req.src  <= '0;
        if (fl_last) walk_q <= 1'b0;
      end
    end
  end

endmodule

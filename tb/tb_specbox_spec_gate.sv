// tb_specbox_spec_gate: the speculation delay gate.
//   - ordinary operations pass in the same cycle;
//   - cache-management, coherence-changing and TLB-missing operations are
//     held until the ROB head reaches their sn, and leave in that cycle;
//   - the stall lasts exactly as many cycles as the head takes to arrive;
//   - a flush drops a held operation;
//   - with protection off nothing is held.
module tb_specbox_spec_gate;
  import specbox_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic enable, in_valid, in_ready, head_valid, flush, out_valid, out_ready, stall, hold;
  logic [7:0] in_sn, head_sn, out_sn;
  spec_kind_e in_kind, out_kind;

  specbox_spec_gate dut (.clk, .rst_n, .enable, .in_valid, .in_ready, .in_sn, .in_kind,
    .rob_head_valid(head_valid), .rob_head_sn(head_sn), .flush,
    .out_valid, .out_ready, .out_sn, .out_kind, .stall_o(stall), .hold_o(hold));

  int checks = 0, failures = 0, stall_cycles = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask
  always @(posedge clk) if (stall) stall_cycles++;

  // hold an op of kind k at sn 20 while the head walks from 15 to 20
  task automatic held_case(input spec_kind_e k);
    int seen;
    stall_cycles = 0;
    in_valid = 1; in_sn = 20; in_kind = k; head_sn = 15; #1;
    check(!out_valid && in_ready, "held kind not passed through");
    @(posedge clk); #1 in_valid = 0;
    seen = 0;
    for (int h = 16; h <= 20; h++) begin
      check(!out_valid, "still held before the head arrives");
      @(posedge clk); #1 head_sn = 8'(h);
    end
    #1;
    check(out_valid && out_sn == 20 && out_kind == k, "released when head reaches sn");
    @(posedge clk); #1;
    check(!out_valid && !stall, "gone after release");
    check(stall_cycles == 5, $sformatf("stalled %0d cycles", stall_cycles)); // head 15 -> 20
  endtask

  initial begin
    enable = 1; in_valid = 0; in_sn = 0; in_kind = KIND_NORMAL; head_valid = 1; head_sn = 0;
    flush = 0; out_ready = 1;
    repeat (2) @(posedge clk); #1 rst_n = 1;

    in_valid = 1; in_sn = 7; in_kind = KIND_NORMAL; #1;
    check(out_valid && out_sn == 7 && in_ready && !stall, "normal op passes");
    @(posedge clk); #1 in_valid = 0;

    held_case(KIND_CMO);
    held_case(KIND_COHERENT);
    held_case(KIND_TLB_MISS);

    // flush
    in_valid = 1; in_sn = 40; in_kind = KIND_CMO; head_sn = 30;
    @(posedge clk); #1 in_valid = 0;
    check(stall, "held");
    flush = 1; @(posedge clk); #1 flush = 0;
    head_sn = 40; #1;
    check(!out_valid && !stall, "flushed op never leaves");

    // protection off
    enable = 0;
    in_valid = 1; in_sn = 50; in_kind = KIND_CMO; head_sn = 45; #1;
    check(out_valid && !hold, "protection off: nothing held");
    @(posedge clk); #1 in_valid = 0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

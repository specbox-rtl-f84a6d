// tb_specbox_prefetcher: the commit-trained next-line prefetcher.
//   - a committed line L yields one non-speculative prefetch of L+1, one
//     cycle later;
//   - squash notifications and a disabled prefetcher train nothing;
//   - a prefetch equal to the previous one is not repeated;
//   - while the cache does not take the prefetch, new training is dropped.
module tb_specbox_prefetcher;
  import specbox_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic enable, train_valid, pf_valid, pf_ready, issue, drop;
  cache_req_t train_req, pf_req;

  specbox_prefetcher #(.DIST(1)) dut (.clk, .rst_n, .enable, .train_valid, .train_req,
    .pf_valid, .pf_ready, .pf_req, .issue_o(issue), .drop_o(drop));

  int checks = 0, failures = 0, n_issue = 0, n_drop = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask
  always @(posedge clk) begin
    if (issue) n_issue++;
    if (drop) n_drop++;
  end

  task automatic train(input cache_op_e o, input int l);
    train_req = '0; train_req.op = o; train_req.line = line_addr_t'(l); train_req.tid = 1;
    train_valid = 1;
    @(posedge clk); #1 train_valid = 0;
  endtask

  initial begin
    enable = 1; train_valid = 0; pf_ready = 0; train_req = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;

    train(OP_COMMIT, 'h100);
    check(pf_valid && pf_req.line == 'h101 && pf_req.op == OP_NONSPEC && pf_req.tid == 1,
          "commit of 0x100 prefetches 0x101 into P next cycle");
    train(OP_COMMIT, 'h200);
    check(n_drop == 1 && pf_req.line == 'h101, "training dropped while the prefetch waits");
    pf_ready = 1; @(posedge clk); #1 pf_ready = 0;
    check(!pf_valid && n_issue == 1, "prefetch taken");
    train(OP_SQUASH, 'h300);
    check(!pf_valid, "squash does not train");
    train(OP_COMMIT, 'h100);
    check(!pf_valid, "same prefetch not repeated");
    enable = 0;
    train(OP_COMMIT, 'h400);
    check(!pf_valid, "disabled prefetcher idle");
    enable = 1;
    pf_ready = 1;
    for (int i = 0; i < 10; i++) train(OP_COMMIT, 'h500 + i);
    @(posedge clk); #1;
    check(n_issue == 11, $sformatf("one prefetch per new committed line (%0d)", n_issue));

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

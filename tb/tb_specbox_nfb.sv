// tb_specbox_nfb: Notification Fill Buffer.
//   - 16 identical commits for one line leave as one notification;
//   - commit, squash, commit of one line leave as three, in order;
//   - a notification repeating an older (not youngest) entry of its line is
//     appended, not merged;
//   - the forward flag of merged notifications is ORed;
//   - 16 distinct lines fill the buffer, the 17th waits;
//   - random traffic with random back-pressure: every input either merges
//     or leaves exactly once (inputs = outputs + merges), order per line
//     kept for differing operations.
module tb_specbox_nfb;
  import specbox_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, merge;
  cache_req_t in_req, out_req;
  logic [4:0] count;

  specbox_nfb #(.DEPTH(16)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_req,
    .out_valid, .out_ready, .out_req, .merge_o(merge), .count_o(count));

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  cache_req_t got[$];
  int n_out = 0, n_in = 0, n_merge = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin got.push_back(out_req); n_out++; end
    if (in_valid && in_ready) n_in++;
    if (merge) n_merge++;
  end

  function automatic cache_req_t mk(input cache_op_e o, input int l, input int t,
                                    input logic f = 0);
    cache_req_t q; q = '0; q.op = o; q.line = line_addr_t'(l); q.tid = tid_t'(t); q.fwd = f;
    return q;
  endfunction

  task automatic push(input cache_req_t q);
    in_req = q; in_valid = 1;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
  endtask

  task automatic drain();
    out_ready = 1;
    while (count != 0) @(posedge clk);
    @(posedge clk); #1 out_ready = 0;
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_req = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;

    // 16 identical
    got.delete();
    for (int i = 0; i < 16; i++) push(mk(OP_COMMIT, 'h40, 0, i == 7));
    check(count == 1, "16 identical merged into one entry");
    drain();
    check(got.size() == 1 && got[0].line == 'h40 && got[0].fwd, "one commit out, fwd ORed");

    // commit, squash, commit of one line
    got.delete();
    push(mk(OP_COMMIT, 'h41, 0)); push(mk(OP_SQUASH, 'h41, 0)); push(mk(OP_COMMIT, 'h41, 0));
    push(mk(OP_COMMIT, 'h41, 0));
    check(count == 3, "different operations kept apart");
    drain();
    check(got.size() == 3 && got[0].op == OP_COMMIT && got[1].op == OP_SQUASH
          && got[2].op == OP_COMMIT, "order of commit/squash/commit kept");

    // different threads are not merged; other lines in between are fine
    got.delete();
    push(mk(OP_COMMIT, 'h50, 0)); push(mk(OP_COMMIT, 'h51, 0)); push(mk(OP_COMMIT, 'h50, 1));
    push(mk(OP_COMMIT, 'h50, 1)); push(mk(OP_COMMIT, 'h51, 0));
    check(count == 3, "merge per line and thread");
    drain();
    check(got.size() == 3 && got[2].tid == 1, "thread 1 entry last");

    // fill the buffer
    got.delete();
    for (int i = 0; i < 16; i++) push(mk(OP_SQUASH, 'h100 + i, 0));
    check(count == 16, "16 entries held");
    in_req = mk(OP_SQUASH, 'h200, 0); in_valid = 1; #1;
    check(!in_ready, "17th distinct line waits when full");
    in_req = mk(OP_SQUASH, 'h10F, 0); #1;
    check(in_ready, "a repeat of a held line still merges when full");
    @(posedge clk); #1 in_valid = 0;
    drain();
    check(got.size() == 16, "16 out");
    for (int i = 0; i < 16; i++) check(got[i].line == line_addr_t'('h100 + i), "FIFO order");

    // random
    got.delete(); n_in = 0; n_out = 0; n_merge = 0;
    fork
      begin
        for (int i = 0; i < 2000; i++)
          push(mk($urandom_range(0, 1) ? OP_COMMIT : OP_SQUASH, $urandom_range(0, 5),
                  $urandom_range(0, 1)));
      end
      begin
        repeat (6000) begin @(posedge clk); #1 out_ready = 1'($urandom_range(0, 1)); end
      end
    join_any
    wait fork;
    drain();
    check(n_in == 2000, "all inputs accepted");
    check(n_out + n_merge == n_in, $sformatf("in %0d = out %0d + merged %0d", n_in, n_out, n_merge));
    check(n_merge > 0 && n_out > 0, "both merges and outputs happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

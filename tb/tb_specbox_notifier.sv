// tb_specbox_notifier: the commit-stage notifier against a model LSQ and
// a model FQ/ROB.
//   - each ROB commit/squash of a load/store yields one L1-D notification
//     with the LSQ entry's line, the thread, commit/squash, and the
//     forward flag set exactly when the access missed in L1;
//   - an accepted branch yields one commit per fetched instruction, a
//     rejected one one squash each, in FQ/ROB order, forward flag from the
//     ihit_mask; the walk takes one cycle per instruction without
//     back-pressure;
//   - with a side's protection off no notification leaves for that side.
// Random back-pressure on both outputs.
module tb_specbox_notifier;
  import specbox_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic d_en, i_en;
  logic rob_valid, rob_ready, rob_commit; logic [7:0] rob_sn; tid_t rob_tid;
  logic [7:0] lsq_sn; line_addr_t lsq_line; hit_mask_t lsq_mask;
  logic br_valid, br_ready, br_accept; logic [7:0] br_id; tid_t br_tid;
  logic fl_req, fl_valid, fl_ready, fl_last; logic [7:0] fl_br;
  line_addr_t fl_line; hit_mask_t fl_mask;
  logic d_valid, d_ready, i_valid, i_ready;
  cache_req_t d_req, i_req;

  specbox_notifier dut (.clk, .rst_n, .d_en, .i_en,
    .rob_valid, .rob_ready, .rob_commit, .rob_sn, .rob_tid,
    .lsq_sn, .lsq_line, .lsq_dhit_mask(lsq_mask),
    .br_valid, .br_ready, .br_accept, .br_id, .br_tid,
    .fl_req, .fl_br, .fl_valid, .fl_ready, .fl_line, .fl_ihit_mask(fl_mask), .fl_last,
    .d_valid, .d_ready, .d_req, .i_valid, .i_ready, .i_req);

  // model LSQ: line and dhit_mask per sn
  line_addr_t lsq_l [192];
  hit_mask_t  lsq_m [192];
  assign lsq_line = lsq_l[lsq_sn];
  assign lsq_mask = lsq_m[lsq_sn];

  // model FQ/ROB: branch b covers NI(b) instructions, line of k-th: b*16 + k/4
  function automatic int ni(input int b); return 1 + (b % 7); endfunction
  int fl_k;
  assign fl_valid = fl_req;
  assign fl_line  = line_addr_t'(int'(fl_br) * 16 + fl_k / 4);
  assign fl_mask  = hit_mask_t'(fl_k % 3 == 0 ? 2'b01 : 2'b00);
  assign fl_last  = (fl_k == ni(int'(fl_br)) - 1);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) fl_k <= 0;
    else if (fl_valid && fl_ready) fl_k <= fl_last ? 0 : fl_k + 1;

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  cache_req_t exp_d[$], exp_i[$];
  always @(posedge clk) if (rst_n) begin
    if (d_valid && d_ready) begin
      cache_req_t e;
      if (exp_d.size() == 0) check(0, "unexpected L1-D notification");
      else begin
        e = exp_d.pop_front();
        check(d_req.op == e.op && d_req.line == e.line && d_req.tid == e.tid
              && d_req.fwd == e.fwd, "L1-D notification matches");
      end
    end
    if (i_valid && i_ready) begin
      cache_req_t e;
      if (exp_i.size() == 0) check(0, "unexpected L1-I notification");
      else begin
        e = exp_i.pop_front();
        check(i_req.op == e.op && i_req.line == e.line && i_req.tid == e.tid
              && i_req.fwd == e.fwd, "L1-I notification matches");
      end
    end
  end

  logic bp;   // random back-pressure on
  always @(posedge clk) begin
    #1;
    d_ready <= bp ? 1'($urandom_range(0, 1)) : 1'b1;
    i_ready <= bp ? 1'($urandom_range(0, 1)) : 1'b1;
  end

  task automatic rob_event(input int sn, input logic c, input int t);
    cache_req_t e;
    rob_sn = 8'(sn); rob_commit = c; rob_tid = tid_t'(t); rob_valid = 1;
    do @(posedge clk); while (!rob_ready);
    #1 rob_valid = 0;
    if (d_en) begin
      e = '0; e.op = c ? OP_COMMIT : OP_SQUASH; e.line = lsq_l[sn]; e.tid = tid_t'(t);
      e.fwd = !lsq_m[sn][0];
      exp_d.push_back(e);
    end
  endtask

  task automatic branch(input int b, input logic acc, input int t);
    br_id = 8'(b); br_accept = acc; br_tid = tid_t'(t); br_valid = 1;
    do @(posedge clk); while (!br_ready);
    #1 br_valid = 0;
    if (i_en)
      for (int k = 0; k < ni(b); k++) begin
        cache_req_t e;
        e = '0; e.op = acc ? OP_COMMIT : OP_SQUASH; e.line = line_addr_t'(b * 16 + k / 4);
        e.tid = tid_t'(t); e.fwd = !(k % 3 == 0);
        exp_i.push_back(e);
      end
  endtask

  initial begin
    rob_valid = 0; br_valid = 0; rob_sn = 0; rob_commit = 0; rob_tid = 0;
    br_id = 0; br_accept = 0; br_tid = 0; d_en = 1; i_en = 1; bp = 0;
    for (int i = 0; i < 192; i++) begin
      lsq_l[i] = line_addr_t'(32'h1000 + i * 3);
      lsq_m[i] = hit_mask_t'(i % 4);
    end
    repeat (2) @(posedge clk); #1 rst_n = 1;

    // walk timing: 7 instructions in 7 consecutive cycles
    begin
      int t0;
      branch(6, 1'b1, 0);
      t0 = 0;
      do begin @(posedge clk); #1; t0++; end while (!br_ready);
      check(t0 == ni(6), $sformatf("walk of %0d instructions took %0d cycles", ni(6), t0));
      @(posedge clk); #1;
    end

    for (int n = 0; n < 300; n++) begin
      rob_event($urandom_range(0, 191), 1'($urandom_range(0, 1)), $urandom_range(0, 1));
      if (n % 5 == 0) branch($urandom_range(0, 255), 1'($urandom_range(0, 1)), $urandom_range(0, 1));
      if (n == 100) bp = 1;
    end
    // protection off
    d_en = 0; i_en = 0;
    for (int n = 0; n < 20; n++) begin
      rob_event(n, 1, 0);
      branch(n, 1, 1);
    end
    bp = 0;
    repeat (40) @(posedge clk);
    check(exp_d.size() == 0 && exp_i.size() == 0, "all expected notifications seen");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_specbox_arbiter: round-robin request arbiter with response routing.
//   - with all four requesters asking continuously, grants rotate
//     0,1,2,3,0,... and each requester gets a quarter of the grants;
//   - an idle requester is skipped without a lost cycle;
//   - src of the forwarded request is the requester index, and a response
//     reaches only the requester named by its src.
module tb_specbox_arbiter;
  import specbox_pkg::*;

  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] req_valid, req_ready, rsp_valid;
  cache_req_t req [N];
  cache_rsp_t rsp [N];
  logic out_valid, out_ready, in_rsp_valid;
  cache_req_t out_req;
  cache_rsp_t in_rsp;

  specbox_arbiter #(.N(N)) dut (.clk, .rst_n, .req_valid, .req_ready, .req, .rsp_valid, .rsp,
    .out_valid, .out_ready, .out_req, .in_rsp_valid, .in_rsp);

  int checks = 0, failures = 0;
  int grants [N];
  int last_g = N - 1;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  // requester i sends lines i*1000 + n
  always_comb for (int i = 0; i < N; i++) begin
    req[i] = '0; req[i].line = line_addr_t'(i * 1000); req[i].tid = tid_t'(i);
  end

  logic rr_check;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int g;
    g = int'(out_req.src);
    grants[g]++;
    check(req_ready[g] && req_valid[g] && $countones(req_ready) == 1, "one grant, to a requester that asks");
    check(out_req.line == line_addr_t'(g * 1000) && out_req.tid == tid_t'(g), "request of the granted one");
    if (rr_check) begin
      int e;
      e = (last_g + 1) % N;
      while (!req_valid[e]) e = (e + 1) % N;
      check(g == e, $sformatf("round robin: expected %0d got %0d", e, g));
    end
    last_g = g;
  end

  initial begin
    req_valid = '0; out_ready = 1; in_rsp_valid = 0; in_rsp = '0; rr_check = 1;
    for (int i = 0; i < N; i++) grants[i] = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    req_valid = '1;
    repeat (40) @(posedge clk);
    #1;
    for (int i = 0; i < N; i++) check(grants[i] == 10, $sformatf("fair share %0d", grants[i]));
    req_valid = 4'b1010;
    repeat (20) @(posedge clk);
    #1;
    check(grants[1] == 20 && grants[3] == 20 && grants[0] == 10, "idle requesters skipped");
    req_valid = '1;
    repeat (200) begin @(posedge clk); #1 out_ready = 1'($urandom_range(0, 1)); end
    out_ready = 0; req_valid = '0;
    for (int s = 0; s < N; s++) begin
      in_rsp = '0; in_rsp.src = src_t'(s); in_rsp_valid = 1; #1;
      check(rsp_valid == (4'b1 << s) && rsp[s].src == src_t'(s), "response routed by src");
    end
    in_rsp_valid = 0; #1;
    check(rsp_valid == '0, "no response, no valid");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_specbox_cache: a two-level labelled hierarchy (an L1 over an L2 over
// a fixed-latency memory) driven through the L1 port.
//
// Checks, with latencies worked out from the parameters:
//   - L1 hit after 1 cycle, L1 miss / L2 hit after L2_LAT + 3 cycles,
//     miss everywhere after MEM_LAT + 6 cycles (2 cycles of L1 sequencing,
//     3 of L2 sequencing, 1 for the L1 refill);
//   - hit_mask of each case;
//   - TOS: a second thread reading a line the first one installed
//     speculatively waits exactly as long as the first one's real miss;
//   - a squashed speculative line is gone at both levels (slow again);
//   - a committed line stays and hits in 1 cycle;
//   - a refill whose temporary victim is owned by the other thread is
//     suspended and the victim stays;
//   - non-blocking misses: four misses are accepted back to back and
//     overlap (one MSHR each), the first keeps the cold-miss latency, a
//     fifth waits for a free MSHR, a hit is served under a miss, and an
//     access to a line being fetched waits and then hits;
//   - writing domain_cap = 0 clears the cache and turns labels off.
// The memory model is pipelined: one request per cycle, each answered
// MEM_LAT cycles after acceptance, in order.
module tb_specbox_cache;
  import specbox_pkg::*;

  localparam int L1_SETS = 4, L1_WAYS = 8, L2_SETS = 8, L2_WAYS = 16;
  localparam int L2_LAT = 8, MEM_LAT = 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       u_valid, u_ready, u_rsp_valid;
  cache_req_t u_req;  cache_rsp_t u_rsp;
  logic       m_valid, m_ready, m_rsp_valid;
  cache_req_t m_req;  cache_rsp_t m_rsp;
  logic       d_valid, d_ready, d_rsp_valid;
  cache_req_t d_req;  cache_rsp_t d_rsp;
  logic       cfg1_we; logic [3:0] cfg1, cap1;
  logic       rdy1, rdy2;
  cache_ev_t  ev1, ev2;
  logic [4:0] cap2;

  specbox_cache #(.SETS(L1_SETS), .WAYS(L1_WAYS), .NT(2), .T_WAYS(2), .HIT_LAT(1),
                  .LOWER_LBL(1'b1), .TID_BASE(2)) l1 (
    .clk, .rst_n,
    .up_req_valid(u_valid), .up_req_ready(u_ready), .up_req(u_req),
    .up_rsp_valid(u_rsp_valid), .up_rsp(u_rsp),
    .down_req_valid(m_valid), .down_req_ready(m_ready), .down_req(m_req),
    .down_rsp_valid(m_rsp_valid), .down_rsp(m_rsp),
    .cfg_cap_we(cfg1_we), .cfg_cap(cfg1), .cap_o(cap1), .ready_o(rdy1), .ev_o(ev1));

  specbox_cache #(.SETS(L2_SETS), .WAYS(L2_WAYS), .NT(4), .T_WAYS(3), .HIT_LAT(L2_LAT),
                  .LOWER_LBL(1'b0)) l2 (
    .clk, .rst_n,
    .up_req_valid(m_valid), .up_req_ready(m_ready), .up_req(m_req),
    .up_rsp_valid(m_rsp_valid), .up_rsp(m_rsp),
    .down_req_valid(d_valid), .down_req_ready(d_ready), .down_req(d_req),
    .down_rsp_valid(d_rsp_valid), .down_rsp(d_rsp),
    .cfg_cap_we(1'b0), .cfg_cap(5'd0), .cap_o(cap2), .ready_o(rdy2), .ev_o(ev2));

  // memory: pipelined, accepts one request per cycle and answers each one
  // MEM_LAT cycles after accepting it, in order
  localparam int MQ = 32;
  cache_req_t mq [MQ]; int mdue [MQ];
  int mhead = 0, mtail = 0, cyc = 0, mem_reqs = 0;
  assign d_ready = (mtail - mhead) < MQ;
  always @(posedge clk) begin
    if (rst_n) begin
      if (d_rsp_valid) mhead <= mhead + 1;
      if (d_valid && d_ready) begin
        mq[mtail % MQ] <= d_req; mdue[mtail % MQ] <= cyc + MEM_LAT;
        mtail <= mtail + 1; mem_reqs <= mem_reqs + 1;
      end
    end
    cyc <= cyc + 1;
  end
  always_comb begin
    d_rsp = '0; d_rsp.src = mq[mhead % MQ].src; d_rsp.line = mq[mhead % MQ].line;
    d_rsp_valid = (mtail != mhead) && cyc >= mdue[mhead % MQ];
  end

  int checks = 0, failures = 0;
  int emul1 = 0, susp1 = 0;
  always @(posedge clk) begin
    if (ev1.emul_miss) emul1++;
    if (ev1.suspend) susp1++;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  cache_rsp_t r; int lat;
  // send one request, wait for its response; lat counts cycles from the
  // accepting edge to the edge where the response is valid
  task automatic send(input cache_op_e o, input line_addr_t l, input int tid,
                      input logic fwd = 1'b0);
    u_req = '0; u_req.op = o; u_req.line = l; u_req.tid = tid_t'(tid); u_req.fwd = fwd;
    u_valid = 1;
    do @(posedge clk); while (!u_ready);
    #1 u_valid = 0; lat = 0;
    do begin @(posedge clk); lat++; end while (!u_rsp_valid);
    r = u_rsp;
    #1;
  endtask

  localparam line_addr_t X = 'h100, Y1 = 'h204, Y2 = 'h208, Y3 = 'h20C, Z = 'h300;

  initial begin
    u_valid = 0; u_req = '0; cfg1_we = 0; cfg1 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (rdy1 && rdy2);
    @(posedge clk); #1;

    // ---- cold miss, then hit
    send(OP_ACCESS, X, 0);
    check(lat == MEM_LAT + 6, $sformatf("cold miss latency %0d", lat));
    check(!r.hit && r.hit_mask == 2'b00 && !r.suspend, "cold miss response");
    send(OP_ACCESS, X, 0);
    check(lat == 1 && r.hit && r.hit_mask == 2'b01, $sformatf("L1 hit latency %0d", lat));

    // ---- TOS: the other thread must see a miss as long as a real one
    send(OP_ACCESS, X, 1);
    check(lat == MEM_LAT + 6 && !r.hit, $sformatf("emulated miss latency %0d", lat));
    check(emul1 == 1, "one emulated miss in L1");
    send(OP_ACCESS, X, 1);
    check(lat == 1 && r.hit, "second thread now owns X");

    // ---- squash (forwarded): the line disappears from both levels
    send(OP_SQUASH, X, 0, 1'b1);
    send(OP_SQUASH, X, 1, 1'b1);
    send(OP_ACCESS, X, 0);
    check(lat == MEM_LAT + 6, $sformatf("squashed line misses again, %0d", lat));

    // ---- commit (forwarded): the line goes to P at both levels
    send(OP_COMMIT, X, 0, 1'b1);
    send(OP_ACCESS, X, 1);
    check(lat == 1 && r.hit, "committed line hits for any thread");

    // ---- L1 miss, L2 hit: install Z, squash it in L1 only, reload
    send(OP_ACCESS, Z, 0);
    send(OP_COMMIT, Z, 0, 1'b1);
    send(OP_NONSPEC, Z + 4 * L1_SETS, 0);   // a P line of the same L1 set
    for (int k = 2; k < 8; k++) send(OP_NONSPEC, Z + line_addr_t'(4 * L1_SETS * k), 0);
    send(OP_ACCESS, Z, 0);
    check(lat == L2_LAT + 3 && r.hit_mask == 2'b10,
          $sformatf("L1 miss / L2 hit latency %0d mask %b", lat, r.hit_mask));

    // ---- non-blocking: five misses back to back against four MSHRs
    begin
      int t0, tacc [5], trsp [5], nrsp;
      line_addr_t ml [5];
      ml = '{'h401, 'h402, 'h403, 'h405, 'h406};
      nrsp = 0; t0 = cyc;
      fork
        for (int k = 0; k < 5; k++) begin
          u_req = '0; u_req.op = OP_ACCESS; u_req.line = ml[k]; u_valid = 1;
          do @(posedge clk); while (!u_ready);
          tacc[k] = cyc - 1;
          #1;
        end
        while (nrsp < 5) begin
          @(posedge clk);
          if (u_rsp_valid)
            for (int k = 0; k < 5; k++) if (u_rsp.line == ml[k]) trsp[k] = cyc - 1;
          if (u_rsp_valid) nrsp++;
        end
      join
      u_valid = 0;
      for (int k = 0; k < 5; k++)
        $display("  miss %0d: accepted %0d, answered %0d", k, tacc[k] - t0, trsp[k] - t0);
      check(tacc[3] - tacc[0] < 10, "four misses accepted while the first is outstanding");
      check(tacc[4] >= trsp[0], "fifth miss waits for a free MSHR");
      check(trsp[3] - tacc[0] < 2 * (MEM_LAT + 6), "four misses overlap in time");
      check(trsp[0] - tacc[0] == MEM_LAT + 6, "first miss keeps the cold-miss latency");
      // hit under miss
      u_req = '0; u_req.op = OP_ACCESS; u_req.line = 'h407; u_valid = 1;
      do @(posedge clk); while (!u_ready);
      #1 u_valid = 0;
      send(OP_ACCESS, ml[0], 0);
      check(lat == 1 && r.hit && r.line == ml[0], $sformatf("hit served while a miss is outstanding (%0d cycles)", lat));
      // a second access to the line still being fetched is parked and
      // served right after the refill, as a hit
      u_req = '0; u_req.op = OP_ACCESS; u_req.line = 'h407; u_valid = 1;
      do @(posedge clk); while (!u_ready);
      #1 u_valid = 0;
      while (!(u_rsp_valid && u_rsp.line == 'h407)) @(posedge clk);
      check(!u_rsp.hit, "the miss answers first");
      @(posedge clk);
      while (!u_rsp_valid) @(posedge clk);
      check(u_rsp.line == 'h407 && u_rsp.hit, "parked same-line access then hits");
      @(posedge clk); #1;
    end

    // ---- suspend: both temporary ways of a set owned by both threads
    send(OP_ACCESS, Y1, 0); send(OP_ACCESS, Y1, 1);
    send(OP_ACCESS, Y2, 0); send(OP_ACCESS, Y2, 1);
    send(OP_ACCESS, Y3, 0);
    check(r.suspend && !r.hit, "refill suspended");
    check(susp1 == 1, "suspend counted");
    send(OP_ACCESS, Y1, 1);
    check(lat == 1 && r.hit, "victim kept for the other thread");

    // ---- protection off
    @(posedge clk); #1 cfg1_we = 1; cfg1 = 4'd0;
    @(posedge clk); #1 cfg1_we = 0;
    wait (rdy1); @(posedge clk); #1;
    check(cap1 == 4'd0, "domain_cap reads 0");
    send(OP_ACCESS, X, 0);
    check(lat == L2_LAT + 3, "cache cleared by the domain_cap write");
    send(OP_SQUASH, X, 0, 1'b1);
    send(OP_ACCESS, X, 1);
    check(lat == 1 && r.hit, "labels off: squash ignored, no emulated miss");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

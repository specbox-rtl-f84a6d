// tb_specbox_top: end-to-end test of the SpecBox cache system at its
// default size (8 cores x 2 SMT threads, 32 KB L1-I, 64 KB L1-D, 2 MB L2),
// with a 100-cycle memory (50 ns at 2 GHz) behind the L2.
//
// The testbench plays the cores: it issues fetches and loads, keeps the
// dhit/ihit masks the caches return, and later commits or squashes them
// through the ROB and branch ports, answering the notifier's LSQ and
// FQ/ROB lookups. Scenarios:
//   1. Spectre-style probe (the bounds-check gadget): a speculative load
//      of probe line 79 is squashed; timing all 256 probe lines then shows
//      no fast line. With protection off (domain_cap 0) the same run
//      shows line 79 fast.
//   2. Cross-core acceleration encoding: a line another core installed
//      speculatively takes a full memory miss time to read.
//   3. Cross-core deceleration encoding: a refill that would evict an L2
//      temporary line still owned by another core is suspended; the other
//      core still reads the line at L2-hit speed. Retried as a
//      non-speculative access (the load has reached the ROB head) it is
//      served, and the other core's lines stay.
//   4. Commit: a committed line is shared at L2-hit speed; a committed
//      line already replaced in L1 is reinstalled and then hits.
//   5. Instruction side: fetches under a branch are committed when the
//      branch resolves; the NFB merges per-line duplicates.
//   6. The commit-trained prefetcher installs the next line.
//   7. A cache-management instruction waits in the delay gate for the ROB
//      head.
// Each mechanism's events are counted; one that never happens fails.
module tb_specbox_top;
  import specbox_pkg::*;

  localparam int NC = 8;
  localparam int MEM_LAT = 100;
  localparam int L2_LAT = 8;
  localparam int T_L1 = 1, T_L2 = L2_LAT + 3, T_MEM = MEM_LAT + 6;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic        if_req_valid [NC], if_req_ready [NC], if_rsp_valid [NC];
  cache_req_t  if_req [NC];  cache_rsp_t if_rsp [NC];
  logic        ls_req_valid [NC], ls_req_ready [NC], ls_rsp_valid [NC];
  cache_req_t  ls_req [NC];  cache_rsp_t ls_rsp [NC];
  logic        rob_valid [NC], rob_ready [NC], rob_commit [NC];
  logic [7:0]  rob_sn [NC], lsq_sn [NC];
  tid_t        rob_tid [NC];
  line_addr_t  lsq_line [NC];  hit_mask_t lsq_dhit_mask [NC];
  logic        br_valid [NC], br_ready [NC], br_accept [NC];
  logic [7:0]  br_id [NC], fl_br [NC];
  tid_t        br_tid [NC];
  logic        fl_req [NC], fl_valid [NC], fl_ready [NC], fl_last [NC];
  line_addr_t  fl_line [NC];  hit_mask_t fl_ihit_mask [NC];
  logic        g_in_valid [NC], g_in_ready [NC], rob_head_valid [NC], g_flush [NC];
  logic        g_out_valid [NC], g_out_ready [NC], g_stall [NC];
  logic [7:0]  g_in_sn [NC], rob_head_sn [NC], g_out_sn [NC];
  spec_kind_e  g_in_kind [NC], g_out_kind [NC];
  logic        cfg_l1i_we [NC], cfg_l1d_we [NC], cfg_l2_we;
  logic [2:0]  cfg_l1i_cap [NC];
  logic [3:0]  cfg_l1d_cap [NC];
  logic [4:0]  cfg_l2_cap;
  logic        mem_req_valid, mem_req_ready, mem_rsp_valid;
  cache_req_t  mem_req;  cache_rsp_t mem_rsp;
  logic        ready;
  cache_ev_t   ev_l1i [NC], ev_l1d [NC], ev_l2;
  logic        nfb_merge [NC], pf_issue [NC], gate_hold [NC];

  specbox_top dut (.*, .ready_o(ready));

  // ------------------------------------------------------------------ memory
  int mem_cnt; logic mem_busy; cache_req_t mem_q;
  assign mem_req_ready = !mem_busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin mem_busy <= 0; mem_cnt <= 0; mem_q <= '0; end
    else if (!mem_busy && mem_req_valid) begin
      mem_busy <= 1; mem_cnt <= MEM_LAT - 1; mem_q <= mem_req;
    end else if (mem_busy) begin
      if (mem_cnt == 0) mem_busy <= 0;
      else mem_cnt <= mem_cnt - 1;
    end
  end
  always_comb begin
    mem_rsp = '0; mem_rsp.src = mem_q.src; mem_rsp.line = mem_q.line;
    mem_rsp_valid = mem_busy && mem_cnt == 0;
  end

  // ------------------------------------------------------------------ core-side models
  line_addr_t lsq_l [NC][192];
  hit_mask_t  lsq_m [NC][192];
  line_addr_t fq_l  [NC][16];
  hit_mask_t  fq_m  [NC][16];
  int         fq_n  [NC];
  int         fl_k  [NC];
  for (genvar c = 0; c < NC; c++) begin : g_m
    assign lsq_line[c]      = lsq_l[c][lsq_sn[c]];
    assign lsq_dhit_mask[c] = lsq_m[c][lsq_sn[c]];
    assign fl_valid[c]      = fl_req[c];
    assign fl_line[c]       = fq_l[c][fl_k[c]];
    assign fl_ihit_mask[c]  = fq_m[c][fl_k[c]];
    assign fl_last[c]       = (fl_k[c] == fq_n[c] - 1);
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) fl_k[c] <= 0;
      else if (fl_valid[c] && fl_ready[c]) fl_k[c] <= fl_last[c] ? 0 : fl_k[c] + 1;
  end

  // ------------------------------------------------------------------ bookkeeping
  int checks = 0, failures = 0;
  int n_emul = 0, n_susp = 0, n_csw = 0, n_crei = 0, n_sqev = 0, n_rel = 0, n_tins = 0,
      n_trep = 0, n_merge = 0, n_pf = 0, n_hold = 0, n_stall = 0, n_icsw = 0, n_mode = 0,
      n_l2emul = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      n_emul += int'(ev_l1d[c].emul_miss);
      n_susp += int'(ev_l1d[c].suspend);
      n_csw  += int'(ev_l1d[c].commit_switch);
      n_crei += int'(ev_l1d[c].commit_reinstall);
      n_sqev += int'(ev_l1d[c].squash_evict);
      n_rel  += int'(ev_l1d[c].tos_release);
      n_tins += int'(ev_l1d[c].t_install);
      n_trep += int'(ev_l1d[c].t_replace);
      n_icsw += int'(ev_l1i[c].commit_switch);
      n_merge += int'(nfb_merge[c]);
      n_pf   += int'(pf_issue[c]);
      n_hold += int'(gate_hold[c]);
      n_stall += int'(g_stall[c]);
    end
    n_l2emul += int'(ev_l2.emul_miss);
    n_rel    += int'(ev_l2.tos_release);
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  cache_rsp_t r; int lat;
  int sn_next [NC];

  // speculative load by core c, thread t; returns its sn, keeps the mask
  task automatic load(input int c, input int t, input line_addr_t l, output int sn,
                      input cache_op_e op = OP_ACCESS);
    ls_req[c] = '0; ls_req[c].op = op; ls_req[c].line = l; ls_req[c].tid = tid_t'(t);
    ls_req_valid[c] = 1;
    do @(posedge clk); while (!ls_req_ready[c]);
    #0.5 ls_req_valid[c] = 0; lat = 0;
    do begin @(posedge clk); lat++; end while (!ls_rsp_valid[c]);
    r = ls_rsp[c];
    sn = sn_next[c]; sn_next[c] = (sn_next[c] + 1) % 192;
    lsq_l[c][sn] = l; lsq_m[c][sn] = r.hit_mask;
    if ($test$plusargs("trace"))
      $display("  load c%0d t%0d %h: %0d cycles hit=%b mask=%b susp=%b", c, t, l, lat, r.hit,
               r.hit_mask, r.suspend);
    #0.5;
  endtask

  task automatic fetch(input int c, input int t, input line_addr_t l);
    if_req[c] = '0; if_req[c].op = OP_ACCESS; if_req[c].line = l; if_req[c].tid = tid_t'(t);
    if_req_valid[c] = 1;
    do @(posedge clk); while (!if_req_ready[c]);
    #0.5 if_req_valid[c] = 0; lat = 0;
    do begin @(posedge clk); lat++; end while (!if_rsp_valid[c]);
    r = if_rsp[c];
    #0.5;
  endtask

  task automatic rob(input int c, input int sn, input logic commit, input int t);
    rob_sn[c] = 8'(sn); rob_commit[c] = commit; rob_tid[c] = tid_t'(t); rob_valid[c] = 1;
    do @(posedge clk); while (!rob_ready[c]);
    #0.5 rob_valid[c] = 0;
  endtask

  task automatic quiet(input int n = 400);
    repeat (n) @(posedge clk);
    #0.5;
  endtask

  task automatic set_caps(input int l1d, input int l2);
    for (int c = 0; c < NC; c++) begin cfg_l1d_we[c] = 1; cfg_l1d_cap[c] = 4'(l1d); end
    cfg_l2_we = 1; cfg_l2_cap = 5'(l2);
    @(posedge clk); #0.5;
    for (int c = 0; c < NC; c++) cfg_l1d_we[c] = 0;
    cfg_l2_we = 0;
    wait (ready); quiet(4);
    n_mode++;
  endtask

  // probe: one speculative load of line 79, squashed; then time all lines
  task automatic spectre_probe(input line_addr_t base, output int fast, output int fast79);
    int sn, sq;
    load(0, 0, base + 79, sq);
    rob(0, sq, 1'b0, 0);                 // mis-speculation: squash
    quiet();
    fast = 0; fast79 = 0;
    for (int i = 0; i < 256; i++) begin
      load(0, 0, base + line_addr_t'((i * 167) % 256), sn);
      if (lat < T_MEM) begin
        fast++;
        if ((i * 167) % 256 == 79) fast79 = 1;
      end
    end
  endtask

  initial begin
    for (int c = 0; c < NC; c++) begin
      if_req_valid[c] = 0; if_req[c] = '0; ls_req_valid[c] = 0; ls_req[c] = '0;
      rob_valid[c] = 0; rob_commit[c] = 0; rob_sn[c] = 0; rob_tid[c] = 0;
      br_valid[c] = 0; br_accept[c] = 0; br_id[c] = 0; br_tid[c] = 0;
      g_in_valid[c] = 0; g_in_sn[c] = 0; g_in_kind[c] = KIND_NORMAL;
      rob_head_valid[c] = 1; rob_head_sn[c] = 0; g_flush[c] = 0; g_out_ready[c] = 1;
      cfg_l1i_we[c] = 0; cfg_l1i_cap[c] = 0; cfg_l1d_we[c] = 0; cfg_l1d_cap[c] = 0;
      fq_n[c] = 1; sn_next[c] = 0;
      for (int k = 0; k < 16; k++) begin fq_l[c][k] = '0; fq_m[c][k] = '0; end
      for (int k = 0; k < 192; k++) begin lsq_l[c][k] = '0; lsq_m[c][k] = '0; end
    end
    cfg_l2_we = 0; cfg_l2_cap = 0;
    repeat (3) @(posedge clk); #0.5 rst_n = 1;
    wait (ready); quiet(4);

    // ---------------------------------------------------------- 1. probe
    begin
      int fast, f79, sn;
      spectre_probe('h10000, fast, f79);
      check(fast == 0 && f79 == 0, $sformatf("protected: %0d fast probe lines", fast));
      // the gadget's load is committed in real execution: probe stays hidden
      // only while it is speculative. Now the same run with protection off.
      set_caps(0, 0);
      spectre_probe('h20000, fast, f79);
      check(fast == 1 && f79 == 1, $sformatf("unprotected: line 79 fast (%0d fast)", fast));
      set_caps(2, 3);
    end

    // ---------------------------------------------------------- 2. cross-core acceleration
    begin
      int sn, t_cold;
      load(1, 0, 'h30001, sn);
      t_cold = lat;
      check(t_cold == T_MEM, $sformatf("cold miss %0d cycles", t_cold));
      load(2, 0, 'h30001, sn);
      check(lat == t_cold && !r.hit, $sformatf("other core: %0d cycles, as a miss", lat));
      load(2, 0, 'h30001, sn);
      check(lat == T_L1, "now owned in its own L1");
      load(1, 1, 'h30001, sn);
      check(lat == t_cold, "SMT sibling: emulated miss too");
    end

    // ---------------------------------------------------------- 3. cross-core deceleration
    begin
      int sn;
      line_addr_t b [4];
      for (int k = 0; k < 4; k++) b[k] = line_addr_t'('h40005 + k * 2048);   // one L2 set
      for (int k = 0; k < 3; k++) load(3, 0, b[k], sn);
      for (int k = 0; k < 3; k++) load(4, 0, b[k], sn);
      load(3, 0, b[3], sn);
      check(r.suspend, "refill evicting a line owned by another core is suspended");
      load(4, 0, b[0], sn);
      check(lat == T_L2 && !r.suspend, $sformatf("owner still reads at L2 speed (%0d)", lat));
      // the suspended load reaches the ROB head and is retried as a
      // non-speculative access: served from memory, installed in P
      load(3, 0, b[3], sn, OP_NONSPEC);
      check(!r.suspend && lat == T_MEM, $sformatf("retry at the ROB head served (%0d)", lat));
      load(4, 0, b[1], sn);
      check(lat == T_L2, "the other core's lines are still there");
    end

    // ---------------------------------------------------------- 4. commit
    begin
      int sn, s0;
      load(5, 0, 'h50009, s0);
      rob(5, s0, 1'b1, 0);
      quiet();
      load(6, 0, 'h50009, sn);
      check(lat == T_L2, $sformatf("committed line shared at L2 speed (%0d)", lat));
      // reinstall: three lines of one L1 set, the first is replaced in T
      load(5, 0, 'h6000d, s0);
      load(5, 0, 'h6000d + 128, sn);
      load(5, 0, 'h6000d + 256, sn);
      rob(5, s0, 1'b1, 0);
      quiet();
      load(5, 0, 'h6000d, sn);
      check(lat == T_L1, "replaced line reinstalled in P at commit");
      // prefetch: the committed 0x60000 trained a prefetch of 0x60001
      load(5, 0, 'h6000e, sn);
      check(lat == T_L1, $sformatf("next line prefetched (%0d)", lat));
    end

    // ---------------------------------------------------------- 5. instruction side
    begin
      for (int k = 0; k < 8; k++) begin
        fetch(7, 0, 'h70011 + line_addr_t'(k / 4));
        fq_l[7][k] = 'h70011 + line_addr_t'(k / 4);
        fq_m[7][k] = r.hit_mask;
      end
      fq_n[7] = 8;
      br_id[7] = 8'd3; br_accept[7] = 1; br_tid[7] = 0; br_valid[7] = 1;
      do @(posedge clk); while (!br_ready[7]);
      #0.5 br_valid[7] = 0;
      quiet();
      fetch(6, 0, 'h70012);
      check(lat == T_L2, "committed instruction line shared at L2 speed");
    end

    // ---------------------------------------------------------- 7. delay gate
    begin
      g_in_valid[0] = 1; g_in_sn[0] = 8'd20; g_in_kind[0] = KIND_CMO; rob_head_sn[0] = 8'd12;
      @(posedge clk); #0.5 g_in_valid[0] = 0;
      repeat (5) @(posedge clk);
      #0.5;
      check(!g_out_valid[0] && g_stall[0], "clflush held while speculative");
      rob_head_sn[0] = 8'd20; #0.1;
      check(g_out_valid[0] && g_out_sn[0] == 8'd20, "released at the ROB head");
      @(posedge clk); #0.4;
    end

    quiet(50);
    $display("events: emul=%0d l2emul=%0d susp=%0d tins=%0d trep=%0d csw=%0d crei=%0d sqev=%0d rel=%0d icsw=%0d merge=%0d pf=%0d hold=%0d stall=%0d mode=%0d",
             n_emul, n_l2emul, n_susp, n_tins, n_trep, n_csw, n_crei, n_sqev, n_rel, n_icsw,
             n_merge, n_pf, n_hold, n_stall, n_mode);
    check(n_emul > 0,   "L1 emulated miss happened");
    check(n_l2emul > 0, "L2 emulated miss happened");
    check(n_susp > 0,   "suspend happened");
    check(n_tins > 0,   "T install happened");
    check(n_trep > 0,   "T replacement happened");
    check(n_csw > 0,    "commit switch happened");
    check(n_crei > 0,   "commit reinstall happened");
    check(n_sqev > 0,   "squash eviction happened");
    check(n_rel > 0,    "TOS release happened");
    check(n_icsw > 0,   "L1-I commit happened");
    check(n_merge > 0,  "NFB merge happened");
    check(n_pf > 0,     "prefetch happened");
    check(n_hold > 0 && n_stall > 0, "delay gate held an operation");
    check(n_mode > 0,   "domain_cap mode switch happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

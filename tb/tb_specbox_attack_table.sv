// tb_specbox_attack_table: the six abstract cache covert-channel attacks
// (three serialized, three concurrent) run against the full-size cache
// system. Each attack has three stages: prepare (the attacker sets up the
// channel with committed operations), send (a speculative, later squashed
// operation encodes a 1-bit secret: it acts only when the bit is 1) and
// receive (the receiver times one load). Each attack runs twice, with the
// bit 0 and with the bit 1, on fresh addresses, and the two receive times
// must be equal: the channel carries nothing. Which of the two runs first
// is drawn at random. The expected time (fast or
// slow) is checked too.
//
//   1 serialized  prepare: line absent        send: A installs it in T
//   2 serialized  prepare: A installs in P    send: A evicts it (conflicts)
//   3 serialized  prepare: A installs in T    send: A evicts it; the
//                 prepare load then commits and the line is reinstalled
//   4 concurrent  prepare: line absent        send: A installs it in T,
//                 receiver B on another core / on the SMT sibling
//   5 concurrent  prepare: B installs in T    send: A evicts it (conflicts)
//   6 concurrent  prepare: B installs in P    send: A evicts it (conflicts)
// In serialized mode the send operations are squashed before the receive;
// in concurrent mode the receive happens while they are still in flight.
// Conflicting lines are 8 lines that share the target's L1 and L2 sets.
// The six attack shapes follow the described security analysis; the
// addresses, the 8 conflicting lines and where the receiver runs are this
// testbench's own choices.
module tb_specbox_attack_table;
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
  task automatic load(input int c, input int t, input line_addr_t l, output int sn);
    ls_req[c] = '0; ls_req[c].op = OP_ACCESS; ls_req[c].line = l; ls_req[c].tid = tid_t'(t);
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

  // A = core 0 thread 0; B = core 1 thread 0 (other core) or core 0
  // thread 1 (SMT sibling)
  int run_no = 0;

  // speculative conflicting loads by A; their sns are returned for squash
  task automatic conflicts(input line_addr_t l, output int sns [8]);
    for (int k = 0; k < 8; k++) load(0, 0, l + line_addr_t'((k + 1) * 2048), sns[k]);
  endtask
  task automatic squash_all(input int sns [8]);
    for (int k = 0; k < 8; k++) rob(0, sns[k], 1'b0, 0);
    quiet(300);
  endtask

  // run one attack with one secret bit; returns the receive time
  task automatic attack(input int line, input int bc, input int bt, input bit secret,
                        output int t_rx);
    line_addr_t l;
    int sn, sp, sns [8];
    l = line_addr_t'('h300000 + run_no * 5);
    run_no++;
    case (line)
      1: begin
        if (secret) begin load(0, 0, l, sn); rob(0, sn, 1'b0, 0); quiet(300); end
        load(0, 0, l, sn); t_rx = lat;
      end
      2: begin
        load(0, 0, l, sp); rob(0, sp, 1'b1, 0); quiet(300);
        if (secret) begin conflicts(l, sns); squash_all(sns); end
        load(0, 0, l, sn); t_rx = lat;
      end
      3: begin
        load(0, 0, l, sp);
        if (secret) begin conflicts(l, sns); squash_all(sns); end
        rob(0, sp, 1'b1, 0); quiet(300);
        load(0, 0, l, sn); t_rx = lat;
      end
      4: begin
        if (secret) load(0, 0, l, sp);
        load(bc, bt, l, sn); t_rx = lat;
        if (secret) begin rob(0, sp, 1'b0, 0); quiet(300); end
      end
      5: begin
        load(bc, bt, l, sp);
        if (secret) conflicts(l, sns);
        load(bc, bt, l, sn); t_rx = lat;
        if (secret) squash_all(sns);
      end
      default: begin
        load(bc, bt, l, sp); rob(bc, sp, 1'b1, bt); quiet(300);
        if (secret) conflicts(l, sns);
        load(bc, bt, l, sn); t_rx = lat;
        if (secret) squash_all(sns);
      end
    endcase
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

    begin
      int t0, t1;
      string nm;
      int lines [8] = '{1, 2, 3, 4, 4, 5, 5, 6};
      int bcs   [8] = '{0, 0, 0, 1, 0, 1, 0, 0};
      int bts   [8] = '{0, 0, 0, 0, 1, 0, 1, 1};
      int slow  [8] = '{1, 0, 0, 1, 1, 0, 0, 0};
      for (int i = 0; i < 8; i++) begin
        // which secret runs first is drawn at random
        if ($urandom % 2 == 0) begin
          attack(lines[i], bcs[i], bts[i], 1'b0, t0);
          attack(lines[i], bcs[i], bts[i], 1'b1, t1);
        end else begin
          attack(lines[i], bcs[i], bts[i], 1'b1, t1);
          attack(lines[i], bcs[i], bts[i], 1'b0, t0);
        end
        nm = $sformatf("attack %0d (receiver core %0d thread %0d)", lines[i], bcs[i], bts[i]);
        $display("%s: secret 0 -> %0d cycles, secret 1 -> %0d cycles", nm, t0, t1);
        check(t0 == t1, {nm, ": receive time independent of the secret"});
        check(slow[i] ? (t1 >= T_MEM) : (t1 <= T_L2), {nm, ": expected speed"});
      end
    end
    $display("events: emul=%0d l2emul=%0d susp=%0d trep=%0d crei=%0d sqev=%0d rel=%0d",
             n_emul, n_l2emul, n_susp, n_trep, n_crei, n_sqev, n_rel);
    check(n_crei > 0, "attack 3 needed a commit reinstall");
    check(n_l2emul > 0 && n_emul > 0, "attack 4 needed emulated misses");
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

// tb_specbox_set_ctrl: checks the per-set access controller against the
// worked examples of the design and against set invariants.
//
//  1. The 8-way, 2:6 example: Load A, Load B, Load C (replaces A),
//     Commit A (reinstalled in P), Commit B (switched to P, a P way turns
//     into a T way), Squash C (evicted). Way positions are checked.
//  2. TOS, acceleration case: a second thread loading a line the first
//     one installed sees an emulated miss and becomes an owner.
//  3. TOS, deceleration case: a thread whose refill would evict a line
//     also owned by another thread only releases its bit and is
//     suspended; the other thread still hits.
//  4. Squash by one of two owners keeps the line; by the last one evicts.
//  5. Forwarding of commit/squash to a labelled lower level; protection
//     off (capacity 0) installs in P and ignores commit/squash.
//  6. Random requests: the number of T ways stays 2, P lines have no
//     owners, valid T lines have at least one, ages stay a permutation,
//     and no tag is present twice.
module tb_specbox_set_ctrl;
  import specbox_pkg::*;

  localparam int W = 8, NT = 2, TW = 12, AW = 3;

  cache_op_e op; logic [TW-1:0] rtag; tid_t rtid; logic rfwd, fill, cap_zero;
  logic [W-1:0] v, tp, v_o, tp_o;
  logic [W-1:0][TW-1:0] tg, tg_o;
  logic [W-1:0][NT-1:0] ts, ts_o;
  logic [W-1:0][AW-1:0] ag, ag_o;
  logic done, go_down, rhit, rsusp;
  cache_op_e down_op;
  logic e_emul, e_tins, e_trep, e_csw, e_crei, e_sqev, e_rel;

  specbox_set_ctrl #(.WAYS(W), .NT(NT), .TAG_W(TW), .LOWER_LBL(1'b1)) dut (
    .op, .req_tag(rtag), .req_tid(rtid), .req_fwd(rfwd), .fill, .cap_zero,
    .valid_i(v), .tp_i(tp), .tag_i(tg), .tos_i(ts), .age_i(ag),
    .valid_o(v_o), .tp_o(tp_o), .tag_o(tg_o), .tos_o(ts_o), .age_o(ag_o),
    .done, .go_down, .down_op, .rsp_hit(rhit), .rsp_suspend(rsusp),
    .ev_emul_miss(e_emul), .ev_t_install(e_tins), .ev_t_replace(e_trep),
    .ev_commit_switch(e_csw), .ev_commit_reinstall(e_crei),
    .ev_squash_evict(e_sqev), .ev_tos_release(e_rel));

  int checks = 0, failures = 0;
  // result of the last request
  logic r_hit, r_susp, r_down, r_emul; cache_op_e r_dop;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic commit_state();
    v = v_o; tp = tp_o; tg = tg_o; ts = ts_o; ag = ag_o;
  endtask

  // one request, with the second pass if the controller goes down
  task automatic req(input cache_op_e o, input logic [TW-1:0] t, input int id,
                     input logic f = 1'b0);
    op = o; rtag = t; rtid = tid_t'(id); rfwd = f; fill = 1'b0;
    #1;
    r_down = go_down; r_dop = down_op; r_emul = e_emul;
    r_hit = rhit; r_susp = rsusp;
    check(done ^ go_down, "exactly one of done/go_down");
    commit_state();
    if (r_down) begin
      fill = 1'b1; #1;
      check(done && !go_down, "second pass finishes");
      r_hit = rhit; r_susp = rsusp;
      commit_state();
      fill = 1'b0;
    end
    #1;
  endtask

  function automatic int way_of(input logic [TW-1:0] t);
    for (int i = 0; i < W; i++) if (v[i] && tg[i] == t) return i;
    return -1;
  endfunction

  // the example set: T ways 1 and 5 empty, P ways full, way 3 LRU, then 7
  task automatic setup_example();
    int unsigned a [W] = '{5, 1, 4, 7, 3, 0, 2, 6};
    cap_zero = 1'b0;
    for (int i = 0; i < W; i++) begin
      tp[i] = !(i == 1 || i == 5);
      v[i]  = tp[i];
      tg[i] = TW'(12'h100 + i);
      ts[i] = '0;
      ag[i] = AW'(a[i]);
    end
  endtask

  task automatic invariants(input int tcap);
    int nt; logic [W-1:0] seen;
    nt = 0; seen = '0;
    for (int i = 0; i < W; i++) begin
      if (!tp[i]) nt++;
      if (tp[i]) check(ts[i] == '0, "P line has no owner");
      if (v[i] && !tp[i]) check(ts[i] != '0, "valid T line has an owner");
      seen[ag[i]] = 1'b1;
      for (int j = i + 1; j < W; j++)
        if (v[i] && v[j]) check(tg[i] != tg[j], "no duplicate tag");
    end
    check(nt == tcap, "T capacity constant");
    check(&seen, "ages are a permutation");
  endtask

  localparam logic [TW-1:0] A = 12'h00A, B = 12'h00B, C = 12'h00C, D = 12'h00D;

  initial begin
    // ---------------------------------------------------------- 1. example
    setup_example();
    req(OP_ACCESS, A, 0);
    check(r_down && r_dop == OP_ACCESS && !r_hit, "Load A misses");
    check(way_of(A) == 1 && !tp[1], "A installed in T way 1");
    req(OP_ACCESS, B, 0);
    check(way_of(B) == 5 && !tp[5], "B installed in T way 5");
    req(OP_ACCESS, C, 0);
    check(way_of(C) == 1 && way_of(A) == -1, "C replaces A in way 1");
    req(OP_ACCESS, B, 0);
    check(r_hit && !r_down, "in-flight hit on B");
    req(OP_COMMIT, A, 0);
    check(r_down && r_dop == OP_NONSPEC, "Commit A refetches A");
    check(way_of(A) == 3 && tp[3], "A reinstalled in P way 3");
    req(OP_COMMIT, B, 0);
    check(!r_down && way_of(B) == 5 && tp[5], "B switched to P in way 5");
    check(!tp[7] && !v[7], "way 7 became a free T way");
    req(OP_SQUASH, C, 0);
    check(way_of(C) == -1 && !tp[1] && !v[1], "C evicted, way 1 free T");
    check(v[0] && v[2] && v[4] && v[6], "other P lines untouched");
    invariants(2);

    // ---------------------------------------------------------- 2. TOS (a)
    setup_example();
    req(OP_ACCESS, A, 0);
    check(ts[1] == 2'b01, "sender owns A");
    req(OP_ACCESS, A, 1);
    check(r_emul && r_down && !r_hit, "receiver sees an emulated miss on A");
    check(ts[1] == 2'b11 && way_of(A) == 1, "both own A afterwards");
    req(OP_ACCESS, A, 1);
    check(r_hit && !r_down, "receiver now hits A");

    // ---------------------------------------------------------- 3. TOS (b)
    setup_example();
    req(OP_ACCESS, B, 0);                       // B in way 1, older
    req(OP_ACCESS, D, 0);                       // D in way 5, younger
    req(OP_ACCESS, B, 1);
    check(r_emul && ts[1] == 2'b11, "receiver also owns B");
    req(OP_ACCESS, A, 0);                       // would evict B
    check(r_susp && !r_hit, "sender's Load A suspended");
    check(way_of(B) == 1 && ts[1] == 2'b10, "B kept, sender's bit reset");
    check(way_of(A) == -1, "A not installed");
    req(OP_ACCESS, B, 1);
    check(r_hit && !r_down, "receiver still hits B");
    req(OP_COMMIT, B, 1);
    check(tp[1] && ts[1] == 2'b00, "B committed to P, TOS cleared");
    req(OP_ACCESS, A, 0);
    check(!r_susp && way_of(A) >= 0 && !tp[way_of(A)], "A installed after B committed");
    invariants(2);

    // ---------------------------------------------------------- 4. squash
    setup_example();
    req(OP_ACCESS, C, 0);
    req(OP_ACCESS, C, 1);
    req(OP_SQUASH, C, 0);
    check(way_of(C) == 1 && ts[1] == 2'b10, "squash by one owner keeps C");
    req(OP_SQUASH, C, 0);
    check(way_of(C) == 1 && ts[1] == 2'b10, "repeated squash is ignored");
    req(OP_SQUASH, C, 1);
    check(way_of(C) == -1, "squash by the last owner evicts C");
    req(OP_SQUASH, 12'h100, 0);
    check(v[0] && tp[0], "squash of a P line is ignored");

    // ---------------------------------------------------------- 5. forwarding, protection off
    setup_example();
    req(OP_ACCESS, A, 0);
    req(OP_COMMIT, A, 0, 1'b1);
    check(r_down && r_dop == OP_COMMIT && tp[1], "commit forwarded, A in P");
    req(OP_SQUASH, B, 0, 1'b1);
    check(r_down && r_dop == OP_SQUASH, "squash forwarded");
    req(OP_COMMIT, D, 0, 1'b1);
    check(r_down && r_dop == OP_COMMIT && way_of(D) >= 0 && tp[way_of(D)],
          "forwarded commit miss reinstalls D in P");
    req(OP_ACCESS, 12'h55, 0);
    check(!tp[way_of(12'h55)], "speculative line in T");
    req(OP_NONSPEC, 12'h66, 0);
    check(r_dop == OP_NONSPEC && tp[way_of(12'h66)], "prefetch installs in P");
    setup_example();
    for (int i = 0; i < W; i++) tp[i] = 1'b1;
    cap_zero = 1'b1;
    req(OP_ACCESS, A, 0);
    check(r_dop == OP_NONSPEC && way_of(A) >= 0 && tp[way_of(A)], "off: access installs in P");
    req(OP_COMMIT, 12'h77, 0, 1'b1);
    check(!r_down, "off: commit ignored");
    req(OP_ACCESS, A, 1);
    check(r_hit, "off: no emulated miss");
    cap_zero = 1'b0;

    // ---------------------------------------------------------- 6. random
    setup_example();
    for (int n = 0; n < 3000; n++) begin
      cache_op_e o;
      case ($urandom_range(0, 9))
        0, 1, 2, 3: o = OP_ACCESS;
        4, 5: o = OP_COMMIT;
        6, 7: o = OP_SQUASH;
        default: o = OP_NONSPEC;
      endcase
      req(o, TW'($urandom_range(0, 15)), $urandom_range(0, 1), 1'($urandom_range(0, 1)));
      invariants(2);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

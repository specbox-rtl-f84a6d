// specbox_cache: set-associative cache level with temporary/persistent
// domains and thread-ownership semaphores. One instance per L1-I, per L1-D
// and for the shared L2.
//
// Each line's tag area holds, besides valid and tag, the 1-bit T/P flag,
// an NT-bit TOS label (one bit per hardware thread sharing the cache) and
// an LRU age. The decisions of the access flow are made by
// specbox_set_ctrl; this module holds the arrays, the domain_cap register
// and the sequencing.
//
// Sequencing. One request is looked up at a time, but misses do not block:
// each request that must go to the next level waits in a miss status
// holding register (MSHR) while the cache serves others.
//   IDLE   accept a request from up_req, or start the refill pass of an
//          MSHR whose answer has arrived (refills go first)
//   PROC   read the set, let the controller decide, write the set back;
//          answer a hit after HIT_LAT cycles counted from acceptance, or
//          put the request's down operation into a free MSHR
//   FILL   present the MSHR's request again with the set as it is now;
//          answer
//   HOLD   remaining hit latency when HIT_LAT > 1
//   INIT   after reset or a domain_cap write: one set per cycle, every way
//          invalid, the highest cap ways of each set form the T domain
// MSHRs send their operations down in index order; answers are matched by
// line address. A request is accepted only when an MSHR is free; one
// whose line an MSHR holds is parked (a one-entry buffer, which stops
// further acceptance) until that refill is done, so two requests for one
// line never overlap and a commit or squash is applied after the access
// it refers to. An emulated
// miss (TOS) goes down exactly as a real miss does, so its latency is the
// miss latency of this level by construction.
//
// Interface: up_req valid/ready, up_rsp valid (always accepted, carries
// the requester's src back); down_req valid/ready, down_rsp valid (always
// accepted; its line names the MSHR). down_req.tid is TID_BASE + the local
// thread id, which names the thread in the next level's TOS label.
// cfg_cap_we writes domain_cap (the number of T ways per set); writing 0
// turns protection off, and every access is then treated as
// non-speculative. A domain_cap write is held until no miss is
// outstanding, then clears the cache; ready_o is low meanwhile.
//
// From the evaluated configuration: the defaults (64 KB L1-D: 128 sets,
// 8 ways, 2 temporary ways, 2 SMT threads, 1 cycle round trip, 4 MSHRs).
// For L1-I (4 ways) and the L2 (2048 sets, 16 ways, 3 temporary ways,
// 8-cycle round trip, 16 MSHRs) the top overrides them. This design's own
// choices: tags only (the data array and write-back of dirty lines are
// not modelled), a single lookup port, hit latency not pipelined (an L2
// hit occupies the L2 for its 8 cycles), the same-line rule above, a
// domain_cap write that clears the cache, and the reset walk.
module specbox_cache
  import specbox_pkg::*;
#(
  parameter int unsigned SETS      = 128,
  parameter int unsigned WAYS      = 8,
  parameter int unsigned NT        = 2,
  parameter int unsigned T_WAYS    = 2,   // domain_cap after reset
  parameter int unsigned HIT_LAT   = 1,   // cycles from accept to hit response
  parameter bit          LOWER_LBL = 1'b1,
  parameter int unsigned TID_BASE  = 0,
  parameter int unsigned MSHRS     = 4,   // misses outstanding at once
  localparam int unsigned IDX_W    = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned TAG_W    = LINE_W - IDX_W,
  localparam int unsigned AGE_W    = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned CAP_W    = $clog2(WAYS + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // requests from above
  input  logic             up_req_valid,
  output logic             up_req_ready,
  input  cache_req_t       up_req,
  output logic             up_rsp_valid,
  output cache_rsp_t       up_rsp,
  // next level
  output logic             down_req_valid,
  input  logic             down_req_ready,
  output cache_req_t       down_req,
  input  logic             down_rsp_valid,
  input  cache_rsp_t       down_rsp,
  // domain_cap privileged register
  input  logic             cfg_cap_we,
  input  logic [CAP_W-1:0] cfg_cap,
  output logic [CAP_W-1:0] cap_o,
  output logic             ready_o,      // initialised, accepting requests
  output cache_ev_t        ev_o
);

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_PROC, S_FILL, S_HOLD} state_e;
  localparam int unsigned MIX_W = (MSHRS > 1) ? $clog2(MSHRS) : 1;

  // tag area
  logic [WAYS-1:0]             valid_q [SETS];
  logic [WAYS-1:0]             tp_q    [SETS];
  logic [WAYS-1:0][TAG_W-1:0]  tag_q   [SETS];
  logic [WAYS-1:0][NT-1:0]     tos_q   [SETS];
  logic [WAYS-1:0][AGE_W-1:0]  age_q   [SETS];

  // miss status holding registers: one per request waiting for the next level
  logic [MSHRS-1:0]  m_valid, m_sent, m_done, m_susp;
  cache_req_t        m_req  [MSHRS];
  cache_op_e         m_op   [MSHRS];
  hit_mask_t         m_mask [MSHRS];

  state_e            state_q;
  cache_req_t        cur_q;
  hit_mask_t         down_mask_q;
  logic              down_susp_q;
  cache_rsp_t        rsp_q;
  logic [7:0]        cnt_q;
  logic [CAP_W-1:0]  cap_q;
  logic              cap_pend_q;
  logic              park_v_q;     // accepted request waiting for its line's MSHR
  cache_req_t        park_q;
  logic [CAP_W-1:0]  cap_new_q;
  logic [IDX_W-1:0]  init_idx_q;

  logic [IDX_W-1:0]  idx;
  logic [TAG_W-1:0]  tag;
  logic              fill;

  logic [WAYS-1:0]             n_valid, n_tp;
  logic [WAYS-1:0][TAG_W-1:0]  n_tag;
  logic [WAYS-1:0][NT-1:0]     n_tos;
  logic [WAYS-1:0][AGE_W-1:0]  n_age;
  logic      c_done, c_down, c_hit, c_susp;
  cache_op_e c_down_op;
  logic      e_emul, e_tins, e_trep, e_csw, e_crei, e_sqev, e_rel;

  assign idx  = cur_q.line[IDX_W-1:0];
  assign tag  = cur_q.line[LINE_W-1:IDX_W];
  assign fill = (state_q == S_FILL);

  // MSHR selection
  logic             free_any, iss_any, rsp_any, fill_any, fill_arr, conflict, conflict_pk;
  logic [MIX_W-1:0] free_idx, iss_idx, rsp_idx, fill_idx;
  always_comb begin
    free_any = 1'b0; free_idx = '0; iss_any = 1'b0; iss_idx = '0;
    rsp_any = 1'b0; rsp_idx = '0; fill_any = 1'b0; fill_idx = '0;
    conflict = 1'b0; conflict_pk = 1'b0;
    for (int i = MSHRS - 1; i >= 0; i--) begin
      if (!m_valid[i]) begin free_any = 1'b1; free_idx = MIX_W'(i); end
      if (m_valid[i] && !m_sent[i]) begin iss_any = 1'b1; iss_idx = MIX_W'(i); end
      if (m_valid[i] && m_sent[i] && !m_done[i] && m_req[i].line == down_rsp.line) begin
        rsp_any = down_rsp_valid; rsp_idx = MIX_W'(i);
      end
      if (m_valid[i] && m_done[i]) begin fill_any = 1'b1; fill_idx = MIX_W'(i); end
      if (m_valid[i] && m_req[i].line == up_req.line) conflict = 1'b1;
      if (m_valid[i] && m_req[i].line == park_q.line) conflict_pk = 1'b1;
    end
    // a refill already waiting goes first, else the one arriving now
    fill_arr = !fill_any && rsp_any;
    if (fill_arr) begin fill_any = 1'b1; fill_idx = rsp_idx; end
  end

  specbox_set_ctrl #(
    .WAYS(WAYS), .NT(NT), .TAG_W(TAG_W), .LOWER_LBL(LOWER_LBL)
  ) u_ctrl (
    .op(cur_q.op), .req_tag(tag), .req_tid(cur_q.tid), .req_fwd(cur_q.fwd),
    .fill(fill), .cap_zero(cap_q == '0),
    .valid_i(valid_q[idx]), .tp_i(tp_q[idx]), .tag_i(tag_q[idx]),
    .tos_i(tos_q[idx]), .age_i(age_q[idx]),
    .valid_o(n_valid), .tp_o(n_tp), .tag_o(n_tag), .tos_o(n_tos), .age_o(n_age),
    .done(c_done), .go_down(c_down), .down_op(c_down_op),
    .rsp_hit(c_hit), .rsp_suspend(c_susp),
    .ev_emul_miss(e_emul), .ev_t_install(e_tins), .ev_t_replace(e_trep),
    .ev_commit_switch(e_csw), .ev_commit_reinstall(e_crei),
    .ev_squash_evict(e_sqev), .ev_tos_release(e_rel)
  );

  // a refill that the next level suspended is suspended here too
  logic fill_susp;
  assign fill_susp = fill && down_susp_q && (cur_q.op == OP_ACCESS) && (cap_q != '0);

  // set write-back
  logic set_we;
  assign set_we = ((state_q == S_PROC) || (fill && !fill_susp));

  always_ff @(posedge clk) begin
    if (state_q == S_INIT) begin
      for (int w = 0; w < WAYS; w++) begin
        valid_q[init_idx_q][w] <= 1'b0;
        tp_q[init_idx_q][w]    <= (w < WAYS - int'(cap_q)) ? 1'b1 : 1'b0;
        tag_q[init_idx_q][w]   <= '0;
        tos_q[init_idx_q][w]   <= '0;
        age_q[init_idx_q][w]   <= AGE_W'(w);
      end
    end else if (set_we) begin
      valid_q[idx] <= n_valid;
      tp_q[idx]    <= n_tp;
      tag_q[idx]   <= n_tag;
      tos_q[idx]   <= n_tos;
      age_q[idx]   <= n_age;
    end
  end

  // response built from the controller outcome
  cache_rsp_t rsp_now;
  always_comb begin
    rsp_now          = '0;
    rsp_now.src      = cur_q.src;
    rsp_now.line     = cur_q.line;
    rsp_now.hit      = c_hit && !fill_susp;
    rsp_now.suspend  = c_susp || fill_susp;
    rsp_now.hit_mask = '0;
    rsp_now.hit_mask[0] = rsp_now.hit;
    if (fill)
      rsp_now.hit_mask[LEVELS-1:1] = down_mask_q[LEVELS-2:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_INIT;
      cap_q       <= CAP_W'(T_WAYS);
      cap_pend_q  <= 1'b0;
      cap_new_q   <= '0;
      park_v_q    <= 1'b0;
      park_q      <= '0;
      init_idx_q  <= '0;
      cur_q       <= '0;
      down_mask_q <= '0;
      down_susp_q <= 1'b0;
      rsp_q       <= '0;
      cnt_q       <= '0;
      m_valid     <= '0;
      m_sent      <= '0;
      m_done      <= '0;
      m_susp      <= '0;
      for (int i = 0; i < MSHRS; i++) begin
        m_req[i] <= '0; m_op[i] <= OP_NONSPEC; m_mask[i] <= '0;
      end
    end else begin
      if (cfg_cap_we) begin
        cap_pend_q <= 1'b1;
        cap_new_q  <= (cfg_cap > CAP_W'(WAYS)) ? CAP_W'(WAYS) : cfg_cap;
      end
      // the next level accepts a request / answers one
      if (iss_any && down_req_ready) m_sent[iss_idx] <= 1'b1;
      if (rsp_any) begin
        m_done[rsp_idx] <= 1'b1;
        m_mask[rsp_idx] <= down_rsp.hit_mask;
        m_susp[rsp_idx] <= down_rsp.suspend;
      end
      unique case (state_q)
        S_INIT: begin
          init_idx_q <= init_idx_q + 1'b1;
          if (init_idx_q == IDX_W'(SETS - 1)) state_q <= S_IDLE;
        end
        S_IDLE: begin
          if (fill_any) begin
            cur_q       <= m_req[fill_idx];
            down_mask_q <= fill_arr ? down_rsp.hit_mask : m_mask[fill_idx];
            down_susp_q <= fill_arr ? down_rsp.suspend  : m_susp[fill_idx];
            m_valid[fill_idx] <= 1'b0;
            state_q     <= S_FILL;
          end else if (park_v_q && !conflict_pk) begin
            cur_q    <= park_q;
            park_v_q <= 1'b0;
            state_q  <= S_PROC;
          end else if (cap_pend_q && m_valid == '0) begin
            cap_q      <= cap_new_q;
            cap_pend_q <= 1'b0;
            init_idx_q <= '0;
            state_q    <= S_INIT;
          end else if (up_req_valid && up_req_ready) begin
            if (conflict) begin
              park_q   <= up_req;
              park_v_q <= 1'b1;
            end else begin
              cur_q   <= up_req;
              state_q <= S_PROC;
            end
          end
        end
        S_PROC: begin
          if (c_down) begin
            m_valid[free_idx] <= 1'b1;
            m_sent[free_idx]  <= 1'b0;
            m_done[free_idx]  <= 1'b0;
            m_req[free_idx]   <= cur_q;
            m_op[free_idx]    <= c_down_op;
            state_q <= S_IDLE;
          end else if (HIT_LAT <= 1) begin
            state_q <= S_IDLE;
          end else begin
            rsp_q   <= rsp_now;
            cnt_q   <= 8'(HIT_LAT - 2);
            state_q <= S_HOLD;
          end
        end
        S_FILL: state_q <= S_IDLE;
        S_HOLD: begin
          if (cnt_q == '0) state_q <= S_IDLE;
          else cnt_q <= cnt_q - 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // a new request needs a free MSHR (in case it misses); one for a line
  // that is still waiting for the next level is parked until that refill
  // is done. Ready does not look at the request itself.
  assign up_req_ready = (state_q == S_IDLE) && !fill_any && !cap_pend_q && !cfg_cap_we
                        && free_any && !park_v_q;
  assign ready_o      = (state_q != S_INIT) && !cap_pend_q;
  assign cap_o        = cap_q;

  always_comb begin
    up_rsp_valid = 1'b0;
    up_rsp       = rsp_now;
    if (state_q == S_PROC && c_done && HIT_LAT <= 1) up_rsp_valid = 1'b1;
    if (fill) up_rsp_valid = 1'b1;
    if (state_q == S_HOLD && cnt_q == '0) begin
      up_rsp_valid = 1'b1;
      up_rsp       = rsp_q;
    end
  end

  always_comb begin
    down_req_valid = iss_any;
    down_req       = '0;
    down_req.op    = m_op[iss_idx];
    down_req.line  = m_req[iss_idx].line;
    down_req.tid   = tid_t'(TID_BASE) + m_req[iss_idx].tid;
  end

  always_comb begin
    ev_o = '0;
    if (state_q == S_PROC || (fill && !fill_susp)) begin
      ev_o.emul_miss        = e_emul;
      ev_o.t_install        = e_tins;
      ev_o.t_replace        = e_trep;
      ev_o.commit_switch    = e_csw;
      ev_o.commit_reinstall = e_crei;
      ev_o.squash_evict     = e_sqev;
      ev_o.tos_release      = e_rel;
    end
    if (state_q == S_PROC) begin
      ev_o.hit  = c_done && c_hit;
      ev_o.miss = c_down && !e_emul &&
                  (cur_q.op == OP_ACCESS || cur_q.op == OP_NONSPEC);
    end
    ev_o.suspend = up_rsp_valid && up_rsp.suspend;
  end

  // every answer from the next level belongs to a request sent there
  a_rsp_matches: assert property (@(posedge clk) disable iff (!rst_n)
      down_rsp_valid |-> rsp_any);

endmodule

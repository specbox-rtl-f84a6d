// specbox_set_ctrl: access controller of one cache set with temporary /
// persistent domains and thread-ownership semaphores (TOS).
//
// Purely combinational. It takes the state of one set (per way: valid,
// tag, T/P flag, TOS bits, LRU age) and one request, and returns the new
// state of the set and what the cache does next: answer now (done), or go
// to the next level first (go_down, with the operation to send there).
// After the next level has answered, the cache presents the same request
// again with fill=1 and the set as it is then; the module then finishes
// the request (install, reinstall, suspend) and never goes down again.
//
// Domains. tp=0 puts a way in the temporary (T) domain, tp=1 in the
// persistent (P) domain, as the T/P flag is defined for the design. The
// number of T ways of a set stays equal to the domain capacity; free T
// ways are invalid ways with tp=0.
//
// The seven cases of the access flow, for a speculative cache:
//   (1) in-flight access that hits: served, replacement ages unchanged
//   (2) miss, T domain full: the LRU T line is replaced (after the refill)
//   (3) miss, a free T way: the line is installed there
//   (4) squash hitting a T line: the line is evicted
//   (5) squash or commit that hits a P line or misses: ignored
//   (6) commit hitting a T line: it moves to P; the LRU P way is evicted
//       and becomes a free T way, so the capacity stays constant
//   (7) commit that misses: the line is refetched and installed in P
// TOS rules, applied to T lines only:
//   - a thread that owns the line (or a line no thread owns) hits;
//   - a thread that does not own a line owned by others sees an emulated
//     miss: the request goes to the next level as a miss would, and the
//     thread then becomes an owner;
//   - squash or replacement by a thread clears that thread's bit, and the
//     line is evicted only if no other thread still owns it; a refill
//     whose T victim is still owned by others is not installed and is
//     answered with suspend (the requester retries later);
//   - commit moves the line to P and clears all TOS bits.
// Non-speculative requests (prefetch, refills for commits, and every
// access while protection is off, cap_zero=1) behave like a normal LRU
// cache restricted to the P domain. Commit and squash are ignored while
// protection is off.
//
// What follows the paper: the two domains, the seven cases, the TOS rules,
// LRU replacement, no replacement update for in-flight hits. This design's
// own choices: LRU by per-way age counters, a free way is taken before a
// victim (lowest way first), an install or a commit makes the line MRU,
// and the way a suspended refill is answered.
module specbox_set_ctrl
  import specbox_pkg::*;
#(
  parameter int unsigned WAYS      = 8,   // L1-D associativity
  parameter int unsigned NT        = 2,   // hardware threads with a TOS bit
  parameter int unsigned TAG_W     = 35,
  parameter bit          LOWER_LBL = 1'b1, // the next level also has labels
  localparam int unsigned AGE_W    = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned WAY_W    = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned TIX_W    = (NT > 1) ? $clog2(NT) : 1
) (
  // request
  input  cache_op_e                    op,
  input  logic [TAG_W-1:0]             req_tag,
  input  tid_t                         req_tid,
  input  logic                         req_fwd,
  input  logic                         fill,      // second pass after next level
  input  logic                         cap_zero,  // protection off
  // set state
  input  logic [WAYS-1:0]              valid_i,
  input  logic [WAYS-1:0]              tp_i,
  input  logic [WAYS-1:0][TAG_W-1:0]   tag_i,
  input  logic [WAYS-1:0][NT-1:0]      tos_i,
  input  logic [WAYS-1:0][AGE_W-1:0]   age_i,
  // new set state
  output logic [WAYS-1:0]              valid_o,
  output logic [WAYS-1:0]              tp_o,
  output logic [WAYS-1:0][TAG_W-1:0]   tag_o,
  output logic [WAYS-1:0][NT-1:0]      tos_o,
  output logic [WAYS-1:0][AGE_W-1:0]   age_o,
  // outcome
  output logic                         done,      // answer the requester now
  output logic                         go_down,   // send down_op to next level
  output cache_op_e                    down_op,
  output logic                         rsp_hit,
  output logic                         rsp_suspend,
  // events, one pulse per request, for counters and tests
  output logic                         ev_emul_miss,
  output logic                         ev_t_install,
  output logic                         ev_t_replace,
  output logic                         ev_commit_switch,
  output logic                         ev_commit_reinstall,
  output logic                         ev_squash_evict,
  output logic                         ev_tos_release
);

  logic              hit;
  logic [WAY_W-1:0]  hw;
  logic [NT-1:0]     me;
  logic [TIX_W-1:0]  tix;   // TOS bit of the requesting thread

  assign tix = req_tid[TIX_W-1:0];

  // LRU helpers --------------------------------------------------------------
  // Move way w to the MRU position; ways that were younger age by one. The
  // order among the other ways is kept, so the order inside each domain is
  // kept too.
  function automatic logic [WAYS-1:0][AGE_W-1:0] touch(
      input logic [WAYS-1:0][AGE_W-1:0] a, input logic [WAY_W-1:0] w);
    logic [WAYS-1:0][AGE_W-1:0] r;
    r = a;
    for (int i = 0; i < WAYS; i++)
      if (a[i] < a[w]) r[i] = a[i] + 1'b1;
    r[w] = '0;
    return r;
  endfunction

  // Pick a way among the candidates: a free (invalid) one first, lowest
  // index; otherwise the oldest valid one. found=0 if there is no candidate.
  function automatic void pick(input logic [WAYS-1:0] cand,
                               input logic [WAYS-1:0] vld,
                               input logic [WAYS-1:0][AGE_W-1:0] a,
                               output logic found, output logic free,
                               output logic [WAY_W-1:0] way);
    logic [AGE_W-1:0] best;
    found = 1'b0; free = 1'b0; way = '0; best = '0;
    for (int i = WAYS - 1; i >= 0; i--)
      if (cand[i] && !vld[i]) begin
        found = 1'b1; free = 1'b1; way = WAY_W'(i);
      end
    if (!free)
      for (int i = 0; i < WAYS; i++)
        if (cand[i] && vld[i] && (!found || a[i] > best)) begin
          found = 1'b1; way = WAY_W'(i); best = a[i];
        end
  endfunction

  always_comb begin
    logic             tf, tfree, pf, pfree;
    logic [WAY_W-1:0] tv, pv;
    logic [WAYS-1:0]  pcand;
    cache_op_e        eop;

    me = '0;
    me[tix] = 1'b1;

    hit = 1'b0; hw = '0;
    for (int i = 0; i < WAYS; i++)
      if (valid_i[i] && tag_i[i] == req_tag) begin
        hit = 1'b1; hw = WAY_W'(i);
      end

    valid_o = valid_i; tp_o = tp_i; tag_o = tag_i; tos_o = tos_i; age_o = age_i;
    done = 1'b0; go_down = 1'b0; down_op = OP_NONSPEC;
    rsp_hit = 1'b0; rsp_suspend = 1'b0;
    ev_emul_miss = 1'b0; ev_t_install = 1'b0; ev_t_replace = 1'b0;
    ev_commit_switch = 1'b0; ev_commit_reinstall = 1'b0;
    ev_squash_evict = 1'b0; ev_tos_release = 1'b0;
    tf = 1'b0; tfree = 1'b0; tv = '0; pf = 1'b0; pfree = 1'b0; pv = '0; pcand = '0;

    // with protection off every access is non-speculative
    eop = (cap_zero && op == OP_ACCESS) ? OP_NONSPEC : op;

    unique case (eop)
      // ---------------------------------------------------------------- in-flight access
      OP_ACCESS: begin
        if (hit && tp_i[hw]) begin                       // (1) P hit
          done = 1'b1; rsp_hit = !fill;
        end else if (hit && (tos_i[hw][tix] || tos_i[hw] == '0 || fill)) begin
          // (1) T hit by an owner, or the end of an emulated miss / a refill
          // that found the line already there: become an owner
          tos_o[hw][tix] = 1'b1;
          done = 1'b1; rsp_hit = !fill;
        end else if (!fill) begin
          // miss, or T line owned only by other threads (emulated miss)
          go_down = 1'b1; down_op = OP_ACCESS;
          ev_emul_miss = hit;
        end else begin
          // refill: (3) free T way, else (2) LRU T line, subject to TOS
          pick(~tp_i, valid_i, age_i, tf, tfree, tv);
          done = 1'b1;
          if (!tf) begin
            rsp_suspend = 1'b1;                          // no T domain at all
          end else if (!tfree && (tos_i[tv] & ~me) != '0) begin
            tos_o[tv][tix] = 1'b0;                   // release, keep the line
            rsp_suspend = 1'b1;
            ev_tos_release = 1'b1;
          end else begin
            valid_o[tv] = 1'b1; tp_o[tv] = 1'b0; tag_o[tv] = req_tag;
            tos_o[tv] = me;
            age_o = touch(age_i, tv);
            ev_t_install = 1'b1; ev_t_replace = !tfree;
          end
        end
      end
      // ---------------------------------------------------------------- commit
      OP_COMMIT: begin
        if (cap_zero) begin
          done = 1'b1;                                   // ignored
        end else if (hit && !tp_i[hw]) begin             // (6) switch to P
          tp_o[hw] = 1'b1; tos_o[hw] = '0;
          pcand = tp_i; pcand[hw] = 1'b0;
          pick(pcand, valid_i, age_i, pf, pfree, pv);
          if (pf) begin                                  // keep the capacity
            valid_o[pv] = 1'b0; tp_o[pv] = 1'b0; tos_o[pv] = '0;
          end
          age_o = touch(age_i, hw);
          ev_commit_switch = 1'b1;
          if (LOWER_LBL && req_fwd && !fill) begin
            go_down = 1'b1; down_op = OP_COMMIT;
          end else done = 1'b1;
        end else if (hit) begin                          // (5) already in P
          if (LOWER_LBL && req_fwd && !fill) begin
            go_down = 1'b1; down_op = OP_COMMIT;
          end else done = 1'b1;
        end else if (!fill) begin                        // (7) refetch first
          go_down = 1'b1;
          down_op = (LOWER_LBL && req_fwd) ? OP_COMMIT : OP_NONSPEC;
        end else begin                                   // (7) reinstall in P
          pick(tp_i, valid_i, age_i, pf, pfree, pv);
          done = 1'b1;
          if (pf) begin
            valid_o[pv] = 1'b1; tp_o[pv] = 1'b1; tag_o[pv] = req_tag; tos_o[pv] = '0;
            age_o = touch(age_i, pv);
            ev_commit_reinstall = 1'b1;
          end
        end
      end
      // ---------------------------------------------------------------- squash
      OP_SQUASH: begin
        if (!cap_zero && hit && !tp_i[hw] && tos_i[hw][tix]) begin   // (4)
          tos_o[hw][tix] = 1'b0;
          if ((tos_i[hw] & ~me) == '0) begin
            valid_o[hw] = 1'b0;
            ev_squash_evict = 1'b1;
          end else ev_tos_release = 1'b1;
        end
        if (!cap_zero && LOWER_LBL && req_fwd && !fill) begin
          go_down = 1'b1; down_op = OP_SQUASH;
        end else done = 1'b1;                            // (5) otherwise ignored
      end
      // ---------------------------------------------------------------- non-speculative
      default: begin                                     // OP_NONSPEC
        if (hit) begin
          if (tp_i[hw]) age_o = touch(age_i, hw);
          done = 1'b1; rsp_hit = !fill;
        end else if (!fill) begin
          go_down = 1'b1; down_op = OP_NONSPEC;
        end else begin
          pick(tp_i, valid_i, age_i, pf, pfree, pv);
          done = 1'b1;
          if (pf) begin
            valid_o[pv] = 1'b1; tp_o[pv] = 1'b1; tag_o[pv] = req_tag; tos_o[pv] = '0;
            age_o = touch(age_i, pv);
          end
        end
      end
    endcase
  end

endmodule

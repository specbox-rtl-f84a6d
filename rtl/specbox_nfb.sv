// specbox_nfb: Notification Fill Buffer on the Notifier Bus, in front of
// an L1 cache.
//
// Consecutive fetches and accesses often touch the same 64-byte line, so
// the notifier produces runs of identical commit (or squash) notifications
// for one line. The NFB queues notifications in order and drops a new one
// that repeats the youngest queued notification for the same line (same
// operation, same thread); its "forward to the next level" flag is ORed
// into the queued one. A notification for a line whose youngest queued
// notification differs (say a squash after a commit) is appended, so the
// order of different operations on a line is kept.
//
// Interface: in valid/ready, out valid/ready, both cache_req_t. A merge or
// an append takes one cycle; the head is offered to the cache while the
// buffer is not empty. merge_o pulses for each merged notification.
//
// The 16 entries come from the design description; the merge rule (match
// on the youngest entry of a line, operation and thread) and the shift
// register organisation are this design's own choices.
module specbox_nfb
  import specbox_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned CNT_W = $clog2(DEPTH + 1)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  cache_req_t in_req,
  output logic       out_valid,
  input  logic       out_ready,
  output cache_req_t out_req,
  output logic       merge_o,
  output logic [CNT_W-1:0] count_o
);

  cache_req_t       q   [DEPTH];
  logic [CNT_W-1:0] cnt_q;

  logic             deq;
  logic             m_found, m_ok;
  int unsigned      m_idx;

  // youngest queued entry for the same line
  always_comb begin
    m_found = 1'b0; m_idx = 0;
    for (int i = 0; i < DEPTH; i++)
      if (i < int'(cnt_q) && q[i].line == in_req.line) begin
        m_found = 1'b1; m_idx = i;
      end
    m_ok = m_found && q[m_idx].op == in_req.op && q[m_idx].tid == in_req.tid
           && !(deq && m_idx == 0);
  end

  assign out_valid = (cnt_q != '0);
  assign out_req   = q[0];
  assign deq       = out_valid && out_ready;
  assign in_ready  = m_ok || (cnt_q != CNT_W'(DEPTH)) || deq;
  assign merge_o   = in_valid && m_ok;
  assign count_o   = cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) q[i] <= '0;
    end else begin
      logic       app;
      int unsigned tail;
      app  = in_valid && in_ready && !m_ok;
      tail = int'(cnt_q) - (deq ? 1 : 0);
      if (in_valid && m_ok) q[m_idx].fwd <= q[m_idx].fwd | in_req.fwd;
      if (deq) begin
        for (int i = 0; i < DEPTH - 1; i++) q[i] <= q[i+1];
        if (in_valid && m_ok && m_idx > 0) q[m_idx-1].fwd <= q[m_idx].fwd | in_req.fwd;
      end
      if (app) q[tail] <= in_req;
      cnt_q <= cnt_q + CNT_W'(app) - CNT_W'(deq);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      cnt_q <= CNT_W'(DEPTH));

endmodule

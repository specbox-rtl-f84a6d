// specbox_prefetcher: hardware prefetcher of the L1-D that only learns
// from committed accesses.
//
// A speculative access must not leave a trace through the prefetcher, so
// it is trained by the commit notifications the notifier sends to the
// L1-D, never by the in-flight accesses themselves. Each committed line L
// produces one prefetch of line L + DIST. The prefetch is a
// non-speculative request (OP_NONSPEC), so the cache installs the line in
// the persistent domain. A prefetch equal to the previous one is not
// repeated. While a prefetch waits for the cache, further training events
// are dropped (counted by drop_o).
//
// Interface: train_valid/train_req observe the notifier's L1-D output
// (used only when the handshake fires and the operation is a commit);
// pf_valid/pf_ready/pf_req go to the L1-D request arbiter.
//
// From the design description: training deferred to commit and installs
// into the persistent domain. The prefetch algorithm itself (next-line,
// degree 1, distance DIST) is this design's own, the simplest that does
// the job, since no algorithm is named.
module specbox_prefetcher
  import specbox_pkg::*;
#(
  parameter int unsigned DIST = 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       enable,
  input  logic       train_valid,
  input  cache_req_t train_req,
  output logic       pf_valid,
  input  logic       pf_ready,
  output cache_req_t pf_req,
  output logic       issue_o,   // a prefetch was accepted by the cache
  output logic       drop_o     // a training event was dropped
);

  line_addr_t last_q;
  logic       last_v_q;
  line_addr_t target;
  logic       train;

  assign train  = enable && train_valid && train_req.op == OP_COMMIT;
  assign target = train_req.line + line_addr_t'(DIST);

  assign issue_o = pf_valid && pf_ready;
  assign drop_o  = train && pf_valid && !pf_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pf_valid <= 1'b0;
      pf_req   <= '0;
      last_q   <= '0;
      last_v_q <= 1'b0;
    end else begin
      if (pf_valid && pf_ready) pf_valid <= 1'b0;
      if (train && (!pf_valid || pf_ready) && !(last_v_q && last_q == target)) begin
        pf_valid    <= 1'b1;
        pf_req.op   <= OP_NONSPEC;
        pf_req.line <= target;
        pf_req.tid  <= train_req.tid;
        pf_req.fwd  <= 1'b0;
        pf_req.src  <= '0;
        last_q      <= target;
        last_v_q    <= 1'b1;
      end
    end
  end

endmodule

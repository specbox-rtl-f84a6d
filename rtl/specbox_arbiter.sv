// specbox_arbiter: round-robin request arbiter in front of a blocking
// cache, with the response routed back by requester index.
//
// N requesters share one cache port. Each cycle the arbiter offers the
// cache the request of the first valid requester after the one served
// last, with the src field set to that requester's index; the cache echoes
// src in its response, and the response is presented to that requester
// only. The choice is combinational and the pointer moves when the cache
// accepts. Used for the three sources of an L1 (Notifier Bus, core,
// prefetcher) and for the L1 caches that share the L2.
//
// The paper's system links the L1 caches to the L2 banks through a 4x2
// mesh; this arbiter stands in for that network and is this design's own.
module specbox_arbiter
  import specbox_pkg::*;
#(
  parameter int unsigned N = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N-1:0]     req_valid,
  output logic [N-1:0]     req_ready,
  input  cache_req_t       req      [N],
  output logic [N-1:0]     rsp_valid,
  output cache_rsp_t       rsp      [N],
  output logic             out_valid,
  input  logic             out_ready,
  output cache_req_t       out_req,
  input  logic             in_rsp_valid,
  input  cache_rsp_t       in_rsp
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] last_q;
  logic [IW-1:0] sel;
  logic          any;

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int k = 1; k <= N; k++) begin
      int unsigned c;
      c = (int'(last_q) + k) % N;
      if (!any && req_valid[c]) begin
        any = 1'b1;
        sel = IW'(c);
      end
    end
    out_valid   = any;
    out_req     = req[sel];
    out_req.src = src_t'(sel);
    req_ready   = '0;
    if (any) req_ready[sel] = out_ready;
    for (int i = 0; i < N; i++) begin
      rsp[i]       = in_rsp;
      rsp_valid[i] = in_rsp_valid && (in_rsp.src == src_t'(i));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_q <= IW'(N - 1);
    else if (any && out_ready) last_q <= sel;
  end

endmodule

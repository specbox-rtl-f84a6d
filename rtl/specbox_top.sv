// specbox_top: the SpecBox cache system of an N-core processor.
//
// Per core: a notifier in the commit stage, two Notification Fill Buffers
// (L1-I and L1-D side of the Notifier Bus), a labelled L1-I and L1-D, a
// commit-trained prefetcher on the L1-D and the speculation delay gate.
// All L1 caches share one labelled L2 through a round-robin arbiter; the
// L2's misses leave through the memory port.
//
//   core fetch ---------------------------+
//   ROB/EU -> notifier -> NFB-I ---------> arb -> L1-I --+
//   core load/store ----------------------+               |
//   ROB -> notifier -> NFB-D ------------> arb -> L1-D ---+-> arb -> L2 -> mem
//   notifier commits -> prefetcher ------+                |
//                                        (other cores) ---+
//
// Thread naming: in an L1 a request's tid is the SMT thread (0..SMT-1); an
// L1 passes tid + core*SMT to the L2, so the L2's TOS label has one bit per
// hardware thread of the chip.
//
// The out-of-order core, the coherence directory, the mesh network and the
// DRAM are outside this module; their signals are ports. Core requests
// (fetch, load, store) are cache_req_t with op OP_ACCESS while in flight;
// responses carry hit, hit_mask (the ihit/dhit mask the core stores in its
// FQ/ROB/LSQ entry) and suspend (retry later).
//
// Defaults are the evaluated configuration: 8 cores, 2 SMT threads per
// core, 32 KB 4-way L1-I and 64 KB 8-way L1-D with 2 temporary ways, a
// 2 MB 16-way L2 with 3 temporary ways and 8-cycle hit latency, 16-entry
// NFBs, 192-entry ROB, 4 MSHRs per L1 and 16 in the L2. The single L2
// bank and the arbiter in place of the mesh are this design's own.
module specbox_top
  import specbox_pkg::*;
#(
  parameter int unsigned N_CORES     = 8,
  parameter int unsigned SMT         = 2,
  parameter int unsigned L1I_SETS    = 128,
  parameter int unsigned L1I_WAYS    = 4,
  parameter int unsigned L1I_T       = 2,
  parameter int unsigned L1D_SETS    = 128,
  parameter int unsigned L1D_WAYS    = 8,
  parameter int unsigned L1D_T       = 2,
  parameter int unsigned L2_SETS     = 2048,
  parameter int unsigned L2_WAYS     = 16,
  parameter int unsigned L2_T        = 3,
  parameter int unsigned L1_LAT      = 1,
  parameter int unsigned L2_LAT      = 8,
  parameter int unsigned L1_MSHRS    = 4,
  parameter int unsigned L2_MSHRS    = 16,
  parameter int unsigned NFB_DEPTH   = 16,
  parameter int unsigned ROB_ENTRIES = 192,
  parameter int unsigned BR_W        = 8,
  localparam int unsigned SN_W       = $clog2(ROB_ENTRIES),
  localparam int unsigned CAPI_W     = $clog2(L1I_WAYS + 1),
  localparam int unsigned CAPD_W     = $clog2(L1D_WAYS + 1),
  localparam int unsigned CAP2_W     = $clog2(L2_WAYS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // core instruction fetch
  input  logic              if_req_valid [N_CORES],
  output logic              if_req_ready [N_CORES],
  input  cache_req_t        if_req       [N_CORES],
  output logic              if_rsp_valid [N_CORES],
  output cache_rsp_t        if_rsp       [N_CORES],
  // core loads and stores
  input  logic              ls_req_valid [N_CORES],
  output logic              ls_req_ready [N_CORES],
  input  cache_req_t        ls_req       [N_CORES],
  output logic              ls_rsp_valid [N_CORES],
  output cache_rsp_t        ls_rsp       [N_CORES],
  // ROB commit/squash of loads and stores
  input  logic              rob_valid    [N_CORES],
  output logic              rob_ready    [N_CORES],
  input  logic              rob_commit   [N_CORES],
  input  logic [SN_W-1:0]   rob_sn       [N_CORES],
  input  tid_t              rob_tid      [N_CORES],
  output logic [SN_W-1:0]   lsq_sn       [N_CORES],
  input  line_addr_t        lsq_line     [N_CORES],
  input  hit_mask_t         lsq_dhit_mask[N_CORES],
  // branch resolution and FQ/ROB lookup
  input  logic              br_valid     [N_CORES],
  output logic              br_ready     [N_CORES],
  input  logic              br_accept    [N_CORES],
  input  logic [BR_W-1:0]   br_id        [N_CORES],
  input  tid_t              br_tid       [N_CORES],
  output logic              fl_req       [N_CORES],
  output logic [BR_W-1:0]   fl_br        [N_CORES],
  input  logic              fl_valid     [N_CORES],
  output logic              fl_ready     [N_CORES],
  input  line_addr_t        fl_line      [N_CORES],
  input  hit_mask_t         fl_ihit_mask [N_CORES],
  input  logic              fl_last      [N_CORES],
  // speculation delay gate
  input  logic              g_in_valid   [N_CORES],
  output logic              g_in_ready   [N_CORES],
  input  logic [SN_W-1:0]   g_in_sn      [N_CORES],
  input  spec_kind_e        g_in_kind    [N_CORES],
  input  logic              rob_head_valid[N_CORES],
  input  logic [SN_W-1:0]   rob_head_sn  [N_CORES],
  input  logic              g_flush      [N_CORES],
  output logic              g_out_valid  [N_CORES],
  input  logic              g_out_ready  [N_CORES],
  output logic [SN_W-1:0]   g_out_sn     [N_CORES],
  output spec_kind_e        g_out_kind   [N_CORES],
  output logic              g_stall      [N_CORES],
  // domain_cap registers
  input  logic              cfg_l1i_we   [N_CORES],
  input  logic [CAPI_W-1:0] cfg_l1i_cap  [N_CORES],
  input  logic              cfg_l1d_we   [N_CORES],
  input  logic [CAPD_W-1:0] cfg_l1d_cap  [N_CORES],
  input  logic              cfg_l2_we,
  input  logic [CAP2_W-1:0] cfg_l2_cap,
  // memory
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output cache_req_t        mem_req,
  input  logic              mem_rsp_valid,
  input  cache_rsp_t        mem_rsp,
  // status and event pulses
  output logic              ready_o,
  output cache_ev_t         ev_l1i       [N_CORES],
  output cache_ev_t         ev_l1d       [N_CORES],
  output cache_ev_t         ev_l2,
  output logic              nfb_merge    [N_CORES],
  output logic              pf_issue     [N_CORES],
  output logic              gate_hold    [N_CORES]
);

  localparam int unsigned NL1 = 2 * N_CORES;

  // L1 <-> L2 arbiter ports: index 2c is core c's L1-I, 2c+1 its L1-D
  logic [NL1-1:0] l2a_req_valid, l2a_req_ready, l2a_rsp_valid;
  cache_req_t     l2a_req [NL1];
  cache_rsp_t     l2a_rsp [NL1];
  logic           l2_req_valid, l2_req_ready, l2_rsp_valid;
  cache_req_t     l2_req;
  cache_rsp_t     l2_rsp;
  logic [N_CORES-1:0] l1_ready;
  logic           l2_ready;
  logic [CAP2_W-1:0] l2_cap;

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    // notifier
    logic       nd_valid, nd_ready, ni_valid, ni_ready;
    cache_req_t nd_req, ni_req;
    logic [CAPI_W-1:0] capi;
    logic [CAPD_W-1:0] capd;
    logic       ri, rd;

    specbox_notifier #(.ROB_ENTRIES(ROB_ENTRIES), .BR_W(BR_W)) u_notifier (
      .clk, .rst_n,
      .d_en(capd != '0), .i_en(capi != '0),
      .rob_valid(rob_valid[c]), .rob_ready(rob_ready[c]), .rob_commit(rob_commit[c]),
      .rob_sn(rob_sn[c]), .rob_tid(rob_tid[c]),
      .lsq_sn(lsq_sn[c]), .lsq_line(lsq_line[c]), .lsq_dhit_mask(lsq_dhit_mask[c]),
      .br_valid(br_valid[c]), .br_ready(br_ready[c]), .br_accept(br_accept[c]),
      .br_id(br_id[c]), .br_tid(br_tid[c]),
      .fl_req(fl_req[c]), .fl_br(fl_br[c]), .fl_valid(fl_valid[c]), .fl_ready(fl_ready[c]),
      .fl_line(fl_line[c]), .fl_ihit_mask(fl_ihit_mask[c]), .fl_last(fl_last[c]),
      .d_valid(nd_valid), .d_ready(nd_ready), .d_req(nd_req),
      .i_valid(ni_valid), .i_ready(ni_ready), .i_req(ni_req)
    );

    // Notifier Bus buffers
    logic       bi_valid, bi_ready, bd_valid, bd_ready, mi, md;
    cache_req_t bi_req, bd_req;
    specbox_nfb #(.DEPTH(NFB_DEPTH)) u_nfb_i (
      .clk, .rst_n, .in_valid(ni_valid), .in_ready(ni_ready), .in_req(ni_req),
      .out_valid(bi_valid), .out_ready(bi_ready), .out_req(bi_req),
      .merge_o(mi), .count_o()
    );
    specbox_nfb #(.DEPTH(NFB_DEPTH)) u_nfb_d (
      .clk, .rst_n, .in_valid(nd_valid), .in_ready(nd_ready), .in_req(nd_req),
      .out_valid(bd_valid), .out_ready(bd_ready), .out_req(bd_req),
      .merge_o(md), .count_o()
    );
    assign nfb_merge[c] = mi || md;

    // prefetcher, trained by committed L1-D notifications
    logic       pf_valid, pf_ready;
    cache_req_t pf_req;
    specbox_prefetcher u_pf (
      .clk, .rst_n, .enable(1'b1),
      .train_valid(nd_valid && nd_ready), .train_req(nd_req),
      .pf_valid(pf_valid), .pf_ready(pf_ready), .pf_req(pf_req),
      .issue_o(pf_issue[c]), .drop_o()
    );

    // L1-I: sources 0 Notifier Bus, 1 core fetch
    logic [1:0] ai_valid, ai_ready, ai_rsp_valid;
    cache_req_t ai_req [2];
    cache_rsp_t ai_rsp [2];
    logic       ci_valid, ci_ready, ci_rsp_valid;
    cache_req_t ci_req;
    cache_rsp_t ci_rsp;
    assign ai_valid = {if_req_valid[c], bi_valid};
    assign ai_req[0] = bi_req;
    assign ai_req[1] = if_req[c];
    assign bi_ready = ai_ready[0];
    assign if_req_ready[c] = ai_ready[1];
    assign if_rsp_valid[c] = ai_rsp_valid[1];
    assign if_rsp[c] = ai_rsp[1];

    specbox_arbiter #(.N(2)) u_arb_i (
      .clk, .rst_n, .req_valid(ai_valid), .req_ready(ai_ready), .req(ai_req),
      .rsp_valid(ai_rsp_valid), .rsp(ai_rsp),
      .out_valid(ci_valid), .out_ready(ci_ready), .out_req(ci_req),
      .in_rsp_valid(ci_rsp_valid), .in_rsp(ci_rsp)
    );

    specbox_cache #(
      .SETS(L1I_SETS), .WAYS(L1I_WAYS), .NT(SMT), .T_WAYS(L1I_T), .HIT_LAT(L1_LAT),
      .LOWER_LBL(1'b1), .TID_BASE(c * SMT), .MSHRS(L1_MSHRS)
    ) u_l1i (
      .clk, .rst_n,
      .up_req_valid(ci_valid), .up_req_ready(ci_ready), .up_req(ci_req),
      .up_rsp_valid(ci_rsp_valid), .up_rsp(ci_rsp),
      .down_req_valid(l2a_req_valid[2*c]), .down_req_ready(l2a_req_ready[2*c]),
      .down_req(l2a_req[2*c]),
      .down_rsp_valid(l2a_rsp_valid[2*c]), .down_rsp(l2a_rsp[2*c]),
      .cfg_cap_we(cfg_l1i_we[c]), .cfg_cap(cfg_l1i_cap[c]), .cap_o(capi),
      .ready_o(ri), .ev_o(ev_l1i[c])
    );

    // L1-D: sources 0 Notifier Bus, 1 core load/store, 2 prefetcher
    logic [2:0] ad_valid, ad_ready, ad_rsp_valid;
    cache_req_t ad_req [3];
    cache_rsp_t ad_rsp [3];
    logic       cd_valid, cd_ready, cd_rsp_valid;
    cache_req_t cd_req;
    cache_rsp_t cd_rsp;
    assign ad_valid = {pf_valid, ls_req_valid[c], bd_valid};
    assign ad_req[0] = bd_req;
    assign ad_req[1] = ls_req[c];
    assign ad_req[2] = pf_req;
    assign bd_ready = ad_ready[0];
    assign ls_req_ready[c] = ad_ready[1];
    assign pf_ready = ad_ready[2];
    assign ls_rsp_valid[c] = ad_rsp_valid[1];
    assign ls_rsp[c] = ad_rsp[1];

    specbox_arbiter #(.N(3)) u_arb_d (
      .clk, .rst_n, .req_valid(ad_valid), .req_ready(ad_ready), .req(ad_req),
      .rsp_valid(ad_rsp_valid), .rsp(ad_rsp),
      .out_valid(cd_valid), .out_ready(cd_ready), .out_req(cd_req),
      .in_rsp_valid(cd_rsp_valid), .in_rsp(cd_rsp)
    );

    specbox_cache #(
      .SETS(L1D_SETS), .WAYS(L1D_WAYS), .NT(SMT), .T_WAYS(L1D_T), .HIT_LAT(L1_LAT),
      .LOWER_LBL(1'b1), .TID_BASE(c * SMT), .MSHRS(L1_MSHRS)
    ) u_l1d (
      .clk, .rst_n,
      .up_req_valid(cd_valid), .up_req_ready(cd_ready), .up_req(cd_req),
      .up_rsp_valid(cd_rsp_valid), .up_rsp(cd_rsp),
      .down_req_valid(l2a_req_valid[2*c+1]), .down_req_ready(l2a_req_ready[2*c+1]),
      .down_req(l2a_req[2*c+1]),
      .down_rsp_valid(l2a_rsp_valid[2*c+1]), .down_rsp(l2a_rsp[2*c+1]),
      .cfg_cap_we(cfg_l1d_we[c]), .cfg_cap(cfg_l1d_cap[c]), .cap_o(capd),
      .ready_o(rd), .ev_o(ev_l1d[c])
    );
    assign l1_ready[c] = ri && rd;

    // speculation delay gate
    specbox_spec_gate #(.ROB_ENTRIES(ROB_ENTRIES)) u_gate (
      .clk, .rst_n, .enable(capd != '0),
      .in_valid(g_in_valid[c]), .in_ready(g_in_ready[c]), .in_sn(g_in_sn[c]),
      .in_kind(g_in_kind[c]), .rob_head_valid(rob_head_valid[c]),
      .rob_head_sn(rob_head_sn[c]), .flush(g_flush[c]),
      .out_valid(g_out_valid[c]), .out_ready(g_out_ready[c]), .out_sn(g_out_sn[c]),
      .out_kind(g_out_kind[c]), .stall_o(g_stall[c]), .hold_o(gate_hold[c])
    );
  end

  specbox_arbiter #(.N(NL1)) u_arb_l2 (
    .clk, .rst_n, .req_valid(l2a_req_valid), .req_ready(l2a_req_ready), .req(l2a_req),
    .rsp_valid(l2a_rsp_valid), .rsp(l2a_rsp),
    .out_valid(l2_req_valid), .out_ready(l2_req_ready), .out_req(l2_req),
    .in_rsp_valid(l2_rsp_valid), .in_rsp(l2_rsp)
  );

  specbox_cache #(
    .SETS(L2_SETS), .WAYS(L2_WAYS), .NT(N_CORES * SMT), .T_WAYS(L2_T), .HIT_LAT(L2_LAT),
    .LOWER_LBL(1'b0), .TID_BASE(0), .MSHRS(L2_MSHRS)
  ) u_l2 (
    .clk, .rst_n,
    .up_req_valid(l2_req_valid), .up_req_ready(l2_req_ready), .up_req(l2_req),
    .up_rsp_valid(l2_rsp_valid), .up_rsp(l2_rsp),
    .down_req_valid(mem_req_valid), .down_req_ready(mem_req_ready), .down_req(mem_req),
    .down_rsp_valid(mem_rsp_valid), .down_rsp(mem_rsp),
    .cfg_cap_we(cfg_l2_we), .cfg_cap(cfg_l2_cap), .cap_o(l2_cap),
    .ready_o(l2_ready), .ev_o(ev_l2)
  );

  assign ready_o = l2_ready && (&l1_ready);

endmodule

// hygain_top: the GC-GC-Hybrid cache hierarchy of an 8-core processor.
//
// Per core: a gain-cell L1 instruction cache and a gain-cell L1 data cache
// (64 KB, 16 ways, 2 cycles each: the iso-area double of a 32 KB, 8-way SRAM
// L1), joined by a round-robin arbiter onto a private gain-cell L2 (512 KB,
// 16 ways, 5 cycles). The L1s and L2s run refresh-free under the no-refresh
// policy by default (L12_RET = RET_NRP). All L2s share, through a second
// arbiter, one hybrid last-level cache of 8 MB gain-cell ways (refreshed,
// 10 cycles) and 16 MB STT-RAM ways (89/204 cycles), which talks to main
// memory.
//
// Ports: the cores and the main memory are not part of this design. Each
// core's instruction-fetch and data ports (mem_req_t/mem_rsp_t, valid/ready
// requests, one response per request) and the memory port of the LLC are the
// ports of this module. nrp_threshold programs the saturation value of the
// no-refresh counters (31 = one full retention time). Per-cache event counters
// come out as cache_stats_t arrays.
//
// Sizes, latencies, the hybrid LLC policy, NRP for L1/L2 and refresh for the
// LLC gain cells follow the paper. The arbiters and the line-wide request
// protocol are this design's own choices; there is no coherence between
// cores, since the evaluated workloads are multi-programmed (no sharing).
module hygain_top
  import hygain_pkg::*;
#(
  parameter int unsigned CORES        = 8,
  parameter int unsigned L1_SETS      = 64,
  parameter int unsigned L1_WAYS      = 16,
  parameter int unsigned L1_LAT       = 2,
  parameter int unsigned L2_SETS      = 512,
  parameter int unsigned L2_WAYS      = 16,
  parameter int unsigned L2_LAT       = 5,
  parameter int unsigned LLC_SETS     = 8192,
  parameter int unsigned LLC_GC_WAYS  = 16,
  parameter int unsigned LLC_STT_WAYS = 32,
  parameter int unsigned LLC_LAT      = 10,
  parameter int unsigned STT_RD       = 89,
  parameter int unsigned STT_WR       = 204,
  parameter retention_e  L12_RET      = RET_NRP,
  parameter int unsigned DRT          = DRT_CYCLES,
  parameter int unsigned HALF         = REFRESH_HALF_CYCLES
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NRP_CNT_W-1:0] nrp_threshold,
  // instruction-fetch ports of the cores
  input  logic [CORES-1:0]     if_req_valid,
  output logic [CORES-1:0]     if_req_ready,
  input  mem_req_t             if_req [CORES],
  output logic [CORES-1:0]     if_rsp_valid,
  output mem_rsp_t             if_rsp [CORES],
  // load/store ports of the cores
  input  logic [CORES-1:0]     ls_req_valid,
  output logic [CORES-1:0]     ls_req_ready,
  input  mem_req_t             ls_req [CORES],
  output logic [CORES-1:0]     ls_rsp_valid,
  output mem_rsp_t             ls_rsp [CORES],
  // main memory port
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output mem_req_t             mem_req,
  input  logic                 mem_rsp_valid,
  input  mem_rsp_t             mem_rsp,
  // statistics
  output cache_stats_t         l1i_stats [CORES],
  output cache_stats_t         l1d_stats [CORES],
  output cache_stats_t         l2_stats  [CORES],
  output cache_stats_t         llc_stats
);

  // L2 -> LLC arbiter inputs
  logic [CORES-1:0] l2_dn_valid, l2_dn_ready, l2_dn_rsp_valid;
  mem_req_t         l2_dn_req [CORES];
  mem_rsp_t         l2_dn_rsp;

  for (genvar c = 0; c < CORES; c++) begin : g_core
    // L1 -> L2
    logic     l1i_dn_valid, l1i_dn_ready, l1i_dn_rsp_valid;
    logic     l1d_dn_valid, l1d_dn_ready, l1d_dn_rsp_valid;
    mem_req_t l1i_dn_req, l1d_dn_req;
    mem_rsp_t l1_dn_rsp;
    // arbiter -> L2
    logic     l2_up_valid, l2_up_ready, l2_up_rsp_valid;
    mem_req_t l2_up_req;
    mem_rsp_t l2_up_rsp;

    gc_cache #(.SETS(L1_SETS), .WAYS(L1_WAYS), .HIT_LAT(L1_LAT), .RET(L12_RET),
               .DRT(DRT), .HALF(HALF)) u_l1i (
      .clk, .rst_n, .nrp_threshold,
      .up_req_valid(if_req_valid[c]), .up_req_ready(if_req_ready[c]), .up_req(if_req[c]),
      .up_rsp_valid(if_rsp_valid[c]), .up_rsp(if_rsp[c]),
      .dn_req_valid(l1i_dn_valid), .dn_req_ready(l1i_dn_ready), .dn_req(l1i_dn_req),
      .dn_rsp_valid(l1i_dn_rsp_valid), .dn_rsp(l1_dn_rsp),
      .stats(l1i_stats[c])
    );

    gc_cache #(.SETS(L1_SETS), .WAYS(L1_WAYS), .HIT_LAT(L1_LAT), .RET(L12_RET),
               .DRT(DRT), .HALF(HALF)) u_l1d (
      .clk, .rst_n, .nrp_threshold,
      .up_req_valid(ls_req_valid[c]), .up_req_ready(ls_req_ready[c]), .up_req(ls_req[c]),
      .up_rsp_valid(ls_rsp_valid[c]), .up_rsp(ls_rsp[c]),
      .dn_req_valid(l1d_dn_valid), .dn_req_ready(l1d_dn_ready), .dn_req(l1d_dn_req),
      .dn_rsp_valid(l1d_dn_rsp_valid), .dn_rsp(l1_dn_rsp),
      .stats(l1d_stats[c])
    );

    mem_req_t l1_reqs [2];
    assign l1_reqs[0] = l1i_dn_req;
    assign l1_reqs[1] = l1d_dn_req;

    req_arbiter #(.N(2)) u_l1_arb (
      .clk, .rst_n,
      .in_req_valid({l1d_dn_valid, l1i_dn_valid}),
      .in_req_ready({l1d_dn_ready, l1i_dn_ready}),
      .in_req(l1_reqs),
      .in_rsp_valid({l1d_dn_rsp_valid, l1i_dn_rsp_valid}),
      .in_rsp(l1_dn_rsp),
      .out_req_valid(l2_up_valid), .out_req_ready(l2_up_ready), .out_req(l2_up_req),
      .out_rsp_valid(l2_up_rsp_valid), .out_rsp(l2_up_rsp)
    );

    gc_cache #(.SETS(L2_SETS), .WAYS(L2_WAYS), .HIT_LAT(L2_LAT), .RET(L12_RET),
               .DRT(DRT), .HALF(HALF)) u_l2 (
      .clk, .rst_n, .nrp_threshold,
      .up_req_valid(l2_up_valid), .up_req_ready(l2_up_ready), .up_req(l2_up_req),
      .up_rsp_valid(l2_up_rsp_valid), .up_rsp(l2_up_rsp),
      .dn_req_valid(l2_dn_valid[c]), .dn_req_ready(l2_dn_ready[c]), .dn_req(l2_dn_req[c]),
      .dn_rsp_valid(l2_dn_rsp_valid[c]), .dn_rsp(l2_dn_rsp),
      .stats(l2_stats[c])
    );
  end

  // shared LLC
  logic     llc_up_valid, llc_up_ready, llc_up_rsp_valid;
  mem_req_t llc_up_req;
  mem_rsp_t llc_up_rsp;

  req_arbiter #(.N(CORES)) u_llc_arb (
    .clk, .rst_n,
    .in_req_valid(l2_dn_valid), .in_req_ready(l2_dn_ready), .in_req(l2_dn_req),
    .in_rsp_valid(l2_dn_rsp_valid), .in_rsp(l2_dn_rsp),
    .out_req_valid(llc_up_valid), .out_req_ready(llc_up_ready), .out_req(llc_up_req),
    .out_rsp_valid(llc_up_rsp_valid), .out_rsp(llc_up_rsp)
  );

  hybrid_llc #(
    .SETS(LLC_SETS), .GC_WAYS(LLC_GC_WAYS), .STT_WAYS(LLC_STT_WAYS), .GC_LAT(LLC_LAT),
    .STT_RD(STT_RD), .STT_WR(STT_WR), .DRT(DRT), .HALF(HALF)
  ) u_llc (
    .clk, .rst_n,
    .up_req_valid(llc_up_valid), .up_req_ready(llc_up_ready), .up_req(llc_up_req),
    .up_rsp_valid(llc_up_rsp_valid), .up_rsp(llc_up_rsp),
    .dn_req_valid(mem_req_valid), .dn_req_ready(mem_req_ready), .dn_req(mem_req),
    .dn_rsp_valid(mem_rsp_valid), .dn_rsp(mem_rsp),
    .stats(llc_stats)
  );

endmodule

// halcone_top: shared-memory multi-GPU memory system with HALCONE coherence.
//
// N_GPU GPUs, each with N_CU private L1 caches and N_L2 shared L2 banks,
// reach N_MEM memory modules (HBM stacks) through a switch complex that links
// every L2 bank of every GPU to every memory module. Every memory module has
// a controller (MMC) with a timestamp storage unit (TSU); the DRAM itself is
// outside this design and is reached over the dram_* ports. The compute
// units are outside too: every L1 has a CU port (cu_* arrays, index
// gpu * N_CU + cu). All GPUs share one physical address space; 4 KB pages
// are interleaved over the memory modules.
//
// Defaults are the paper's 4-GPU system: 32 CUs and 8 L2 banks per GPU and
// 8 HBM stacks of 512 MB per GPU (32 modules). The switch complex is built
// as two full crossbars (requests and responses), this design's choice.
//
// Observation outputs give every cache's cts and one-cycle event pulses of
// every cache and TSU, for counting hits, misses and evictions.
module halcone_top
  import halcone_pkg::*;
#(
  parameter int unsigned N_GPU       = 4,
  parameter int unsigned N_CU        = 32,
  parameter int unsigned N_L2        = 8,
  parameter int unsigned N_MEM       = 32,
  parameter int unsigned L1_SETS     = 64,
  parameter int unsigned L1_WAYS     = 4,
  parameter int unsigned L2_SETS     = 256,
  parameter int unsigned L2_WAYS     = 16,
  parameter int unsigned TSU_SETS    = 512,
  parameter int unsigned TSU_WAYS    = 8,
  parameter int unsigned TSU_LATENCY = 50,
  parameter int unsigned RD_LEASE    = RD_LEASE_DEF,
  parameter int unsigned WR_LEASE    = WR_LEASE_DEF,
  localparam int unsigned N_CUS      = N_GPU * N_CU,
  localparam int unsigned N_BANKS    = N_GPU * N_L2
) (
  input  logic      clk,
  input  logic      rst_n,
  // compute units
  input  logic      cu_req_valid [N_CUS],
  output logic      cu_req_ready [N_CUS],
  input  cu_req_t   cu_req       [N_CUS],
  output logic      cu_rsp_valid [N_CUS],
  output word_t     cu_rsp_data  [N_CUS],
  // DRAM layers of the memory modules
  output logic      dram_req_valid[N_MEM],
  input  logic      dram_req_ready[N_MEM],
  output dram_req_t dram_req      [N_MEM],
  input  logic      dram_rsp_valid[N_MEM],
  input  blk_t      dram_rsp_data [N_MEM],
  // observation
  output cts_t      l1_cts [N_CUS],
  output cts_t      l2_cts [N_BANKS],
  output cache_ev_t l1_ev  [N_CUS],
  output cache_ev_t l2_ev  [N_BANKS],
  output tsu_ev_t   tsu_ev [N_MEM]
);

  localparam int unsigned MW = (N_MEM   > 1) ? $clog2(N_MEM)   : 1;
  localparam int unsigned LW = (N_BANKS > 1) ? $clog2(N_BANKS) : 1;

  // L2 bank side of the switch complex, index gpu * N_L2 + bank.
  logic     bq_valid[N_BANKS], bq_ready[N_BANKS];
  mem_req_t bq      [N_BANKS];
  logic [MW-1:0] bq_dst[N_BANKS];
  logic     br_valid[N_BANKS], br_ready[N_BANKS];
  mem_rsp_t br      [N_BANKS];
  logic [MW-1:0] br_src[N_BANKS];

  // memory module side
  logic     mq_valid[N_MEM], mq_ready[N_MEM];
  mem_req_t mq      [N_MEM];
  logic [LW-1:0] mq_src[N_MEM];
  logic     mr_valid[N_MEM], mr_ready[N_MEM];
  mem_rsp_t mr      [N_MEM];
  logic [LW-1:0] mr_dst[N_MEM];

  for (genvar g = 0; g < N_GPU; g++) begin : g_gpu
    logic      c_req_valid[N_CU], c_req_ready[N_CU], c_rsp_valid[N_CU];
    cu_req_t   c_req      [N_CU];
    word_t     c_rsp_data [N_CU];
    cts_t      c_cts      [N_CU];
    cache_ev_t c_ev       [N_CU];
    logic      m_req_valid[N_L2], m_req_ready[N_L2], m_rsp_valid[N_L2];
    mem_req_t  m_req      [N_L2];
    logic [MW-1:0] m_req_dst[N_L2];
    mem_rsp_t  m_rsp      [N_L2];
    cts_t      b_cts      [N_L2];
    cache_ev_t b_ev       [N_L2];

    for (genvar c = 0; c < N_CU; c++) begin : g_cu
      assign c_req_valid[c]         = cu_req_valid[g*N_CU + c];
      assign c_req[c]               = cu_req[g*N_CU + c];
      assign cu_req_ready[g*N_CU + c] = c_req_ready[c];
      assign cu_rsp_valid[g*N_CU + c] = c_rsp_valid[c];
      assign cu_rsp_data[g*N_CU + c]  = c_rsp_data[c];
      assign l1_cts[g*N_CU + c]       = c_cts[c];
      assign l1_ev[g*N_CU + c]        = c_ev[c];
    end
    for (genvar b = 0; b < N_L2; b++) begin : g_bank
      assign bq_valid[g*N_L2 + b] = m_req_valid[b];
      assign bq[g*N_L2 + b]       = m_req[b];
      assign bq_dst[g*N_L2 + b]   = m_req_dst[b];
      assign m_req_ready[b]       = bq_ready[g*N_L2 + b];
      assign m_rsp_valid[b]       = br_valid[g*N_L2 + b];
      assign m_rsp[b]             = br[g*N_L2 + b];
      assign br_ready[g*N_L2 + b] = 1'b1;   // a bank waits for its one response
      assign l2_cts[g*N_L2 + b]   = b_cts[b];
      assign l2_ev[g*N_L2 + b]    = b_ev[b];
    end

    halcone_gpu #(
      .N_CU(N_CU), .N_L2(N_L2), .N_MEM(N_MEM),
      .L1_SETS(L1_SETS), .L1_WAYS(L1_WAYS), .L2_SETS(L2_SETS), .L2_WAYS(L2_WAYS)
    ) u_gpu (
      .clk, .rst_n,
      .cu_req_valid(c_req_valid), .cu_req_ready(c_req_ready), .cu_req(c_req),
      .cu_rsp_valid(c_rsp_valid), .cu_rsp_data(c_rsp_data),
      .mem_req_valid(m_req_valid), .mem_req_ready(m_req_ready), .mem_req(m_req),
      .mem_req_dst(m_req_dst), .mem_rsp_valid(m_rsp_valid), .mem_rsp(m_rsp),
      .l1_cts(c_cts), .l2_cts(b_cts), .l1_ev(c_ev), .l2_ev(b_ev)
    );
  end

  // Switch complex: L2 banks to memory modules and back.
  halcone_xbar #(.N_IN(N_BANKS), .N_OUT(N_MEM), .T(mem_req_t)) u_net_req (
    .clk, .rst_n,
    .in_valid(bq_valid), .in_ready(bq_ready), .in_dst(bq_dst), .in_data(bq),
    .out_valid(mq_valid), .out_ready(mq_ready), .out_src(mq_src), .out_data(mq)
  );

  halcone_xbar #(.N_IN(N_MEM), .N_OUT(N_BANKS), .T(mem_rsp_t)) u_net_rsp (
    .clk, .rst_n,
    .in_valid(mr_valid), .in_ready(mr_ready), .in_dst(mr_dst), .in_data(mr),
    .out_valid(br_valid), .out_ready(br_ready), .out_src(br_src), .out_data(br)
  );

  for (genvar m = 0; m < N_MEM; m++) begin : g_mem
    halcone_mmc #(
      .N_L2(N_BANKS), .N_MEM(N_MEM), .TSU_SETS(TSU_SETS), .TSU_WAYS(TSU_WAYS),
      .TSU_LATENCY(TSU_LATENCY), .RD_LEASE(RD_LEASE), .WR_LEASE(WR_LEASE)
    ) u_mmc (
      .clk, .rst_n,
      .net_req_valid(mq_valid[m]), .net_req_ready(mq_ready[m]), .net_req(mq[m]),
      .net_req_src(mq_src[m]),
      .net_rsp_valid(mr_valid[m]), .net_rsp_ready(mr_ready[m]), .net_rsp(mr[m]),
      .net_rsp_dst(mr_dst[m]),
      .dram_req_valid(dram_req_valid[m]), .dram_req_ready(dram_req_ready[m]),
      .dram_req(dram_req[m]), .dram_rsp_valid(dram_rsp_valid[m]),
      .dram_rsp_data(dram_rsp_data[m]), .tsu_ev(tsu_ev[m])
    );
  end

endmodule

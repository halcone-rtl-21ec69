// halcone_gpu: the cache side of one GPU in the shared-memory multi-GPU system.
//
// N_CU private L1 vector caches (one per CU) reach N_L2 shared L2 banks over
// the GPU's XBar, built as two crossbars: requests from the L1s to the bank
// that owns the block (low block-address bits), responses back to the L1
// that asked. Each L2 bank has its own port towards the memory network. The
// CU ports and the L2 memory-side ports are the module's ports.
//
// Organisation (32 CUs with private L1s, 8 L2 banks, XBar between them)
// follows the paper; the bank mapping and the crossbars are this design's.
module halcone_gpu
  import halcone_pkg::*;
#(
  parameter int unsigned N_CU    = 32,
  parameter int unsigned N_L2    = 8,
  parameter int unsigned N_MEM   = 32,
  parameter int unsigned L1_SETS = 64,
  parameter int unsigned L1_WAYS = 4,
  parameter int unsigned L2_SETS = 256,
  parameter int unsigned L2_WAYS = 16,
  localparam int unsigned MW     = (N_MEM > 1) ? $clog2(N_MEM) : 1
) (
  input  logic      clk,
  input  logic      rst_n,
  // CU side
  input  logic      cu_req_valid [N_CU],
  output logic      cu_req_ready [N_CU],
  input  cu_req_t   cu_req       [N_CU],
  output logic      cu_rsp_valid [N_CU],
  output word_t     cu_rsp_data  [N_CU],
  // memory network side, one port per L2 bank
  output logic      mem_req_valid[N_L2],
  input  logic      mem_req_ready[N_L2],
  output mem_req_t  mem_req      [N_L2],
  output logic [MW-1:0] mem_req_dst[N_L2],
  input  logic      mem_rsp_valid[N_L2],
  input  mem_rsp_t  mem_rsp      [N_L2],
  // observation
  output cts_t      l1_cts       [N_CU],
  output cts_t      l2_cts       [N_L2],
  output cache_ev_t l1_ev        [N_CU],
  output cache_ev_t l2_ev        [N_L2]
);

  localparam int unsigned BW = (N_L2 > 1) ? $clog2(N_L2) : 1;
  localparam int unsigned CW = (N_CU > 1) ? $clog2(N_CU) : 1;

  logic     l1q_valid[N_CU], l1q_ready[N_CU];
  mem_req_t l1q      [N_CU];
  logic [BW-1:0] l1q_dst[N_CU];
  logic     l1r_valid[N_CU], l1r_ready[N_CU];
  mem_rsp_t l1r      [N_CU];
  logic [BW-1:0] l1r_src[N_CU];

  logic     l2q_valid[N_L2], l2q_ready[N_L2];
  mem_req_t l2q      [N_L2];
  logic [CW-1:0] l2q_src[N_L2];
  logic     l2r_valid[N_L2], l2r_ready[N_L2];
  mem_rsp_t l2r      [N_L2];
  logic [CW-1:0] l2r_dst[N_L2];

  for (genvar c = 0; c < N_CU; c++) begin : g_l1
    halcone_l1 #(.SETS(L1_SETS), .WAYS(L1_WAYS)) u_l1 (
      .clk, .rst_n,
      .cu_req_valid(cu_req_valid[c]), .cu_req_ready(cu_req_ready[c]), .cu_req(cu_req[c]),
      .cu_rsp_valid(cu_rsp_valid[c]), .cu_rsp_data(cu_rsp_data[c]),
      .l2_req_valid(l1q_valid[c]), .l2_req_ready(l1q_ready[c]), .l2_req(l1q[c]),
      .l2_rsp_valid(l1r_valid[c]), .l2_rsp(l1r[c]),
      .cts(l1_cts[c]), .ev(l1_ev[c])
    );
    assign l1q_dst[c]   = BW'(l1q[c].baddr % N_L2);
    assign l1r_ready[c] = 1'b1;   // an L1 only ever waits for its one response
  end

  halcone_xbar #(.N_IN(N_CU), .N_OUT(N_L2), .T(mem_req_t)) u_xbar_req (
    .clk, .rst_n,
    .in_valid(l1q_valid), .in_ready(l1q_ready), .in_dst(l1q_dst), .in_data(l1q),
    .out_valid(l2q_valid), .out_ready(l2q_ready), .out_src(l2q_src), .out_data(l2q)
  );

  halcone_xbar #(.N_IN(N_L2), .N_OUT(N_CU), .T(mem_rsp_t)) u_xbar_rsp (
    .clk, .rst_n,
    .in_valid(l2r_valid), .in_ready(l2r_ready), .in_dst(l2r_dst), .in_data(l2r),
    .out_valid(l1r_valid), .out_ready(l1r_ready), .out_src(l1r_src), .out_data(l1r)
  );

  for (genvar b = 0; b < N_L2; b++) begin : g_l2
    halcone_l2 #(
      .SETS(L2_SETS), .WAYS(L2_WAYS), .N_SRC(N_CU), .N_BANK(N_L2), .N_MEM(N_MEM)
    ) u_l2 (
      .clk, .rst_n,
      .up_req_valid(l2q_valid[b]), .up_req_ready(l2q_ready[b]), .up_req(l2q[b]),
      .up_req_src(l2q_src[b]),
      .up_rsp_valid(l2r_valid[b]), .up_rsp_ready(l2r_ready[b]), .up_rsp(l2r[b]),
      .up_rsp_dst(l2r_dst[b]),
      .mem_req_valid(mem_req_valid[b]), .mem_req_ready(mem_req_ready[b]),
      .mem_req(mem_req[b]), .mem_req_dst(mem_req_dst[b]),
      .mem_rsp_valid(mem_rsp_valid[b]), .mem_rsp(mem_rsp[b]),
      .cts(l2_cts[b]), .ev(l2_ev[b])
    );
  end

endmodule

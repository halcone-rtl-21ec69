// tb_halcone_top_full: the full-size system running the inter-GPU example.
//
// The memory system is built at its default size (4 GPUs x 32 CUs, 8 L2
// banks per GPU, 32 memory modules with their TSUs, 16 KB L1s, 256 KB L2
// banks, RdLease 10, WrLease 5) with one 100-cycle DRAM model per module.
// CU 0 of GPU 0 and CU 0 of GPU 1 run the inter-GPU example: both read X
// and Y, GPU 0 writes Y=5, GPU 1 writes X=3, then GPU 0 reads X and GPU 1
// reads Y. X and Y are in the same L2 bank and memory module. Checked: the
// values read (3 and 5), the L1 clocks (11 after the writes, 15 after the
// re-read of X), the TSU and cache events seen, and that idle CUs stay
// ready.
module tb_halcone_top_full;
  import halcone_pkg::*;

  localparam int NCU = 128, NBK = 32, NM = 32, NC = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic      cu_req_valid[NCU], cu_req_ready[NCU], cu_rsp_valid[NCU];
  cu_req_t   cu_req[NCU];
  word_t     cu_rsp_data[NCU];
  logic      dq_valid[NM], dq_ready[NM], dr_valid[NM];
  dram_req_t dq[NM];
  blk_t      dr_data[NM];
  cts_t      l1_cts[NCU], l2_cts[NBK];
  cache_ev_t l1_ev[NCU], l2_ev[NBK];
  tsu_ev_t   tsu_ev[NM];

  halcone_top dut (
    .clk, .rst_n, .cu_req_valid, .cu_req_ready, .cu_req, .cu_rsp_valid, .cu_rsp_data,
    .dram_req_valid(dq_valid), .dram_req_ready(dq_ready), .dram_req(dq),
    .dram_rsp_valid(dr_valid), .dram_rsp_data(dr_data),
    .l1_cts, .l2_cts, .l1_ev, .l2_ev, .tsu_ev
  );
  for (genvar m = 0; m < NM; m++) begin : g_dram
    halcone_dram_model #(.LATENCY(100)) u_dram (
      .clk, .rst_n, .req_valid(dq_valid[m]), .req_ready(dq_ready[m]), .req(dq[m]),
      .rsp_valid(dr_valid[m]), .rsp_data(dr_data[m]));
  end

  int n_comp = 0, n_coh = 0, n_wr_hit = 0, n_alloc = 0, n_extend = 0;
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NCU; i++) begin
      n_comp += l1_ev[i].comp_miss; n_coh += l1_ev[i].coh_miss; n_wr_hit += l1_ev[i].wr_hit;
    end
    for (int i = 0; i < NM; i++) begin
      n_alloc += tsu_ev[i].alloc; n_extend += tsu_ev[i].extend;
    end
  end

  task automatic access(int cu, bit we, logic [ADDR_W-1:0] addr, word_t wd, output word_t rd);
    @(negedge clk);
    cu_req_valid[cu] = 1'b1;
    cu_req[cu] = '{we: we, addr: addr, wdata: wd};
    do @(posedge clk); while (!cu_req_ready[cu]);
    @(negedge clk);
    cu_req_valid[cu] = 1'b0;
    while (!cu_rsp_valid[cu]) @(negedge clk);
    rd = cu_rsp_data[cu];
    @(negedge clk);
  endtask

  initial begin
    word_t r;
    logic [ADDR_W-1:0] X, Y;
    bit all_ready;
    for (int i = 0; i < NCU; i++) begin cu_req_valid[i] = 0; cu_req[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    X = 34'h2000; Y = 34'h2200;   // blocks 0x80 and 0x88: bank 0, module 2
    access(0, 0, X, 0, r);  check(r == word_t'(X >> 2), "I0-1 read X");
    access(NC, 0, Y, 0, r); check(r == word_t'(Y >> 2), "I1-1 read Y");
    check(l1_cts[0] == 0 && l1_cts[NC] == 0, "cts 0 after the reads");
    access(0, 1, Y, 5, r);
    access(NC, 1, X, 3, r);
    check(l1_cts[0] == 11 && l1_cts[NC] == 11,
          $sformatf("cts after the writes %0d %0d, exp 11", l1_cts[0], l1_cts[NC]));
    access(0, 0, X, 0, r);  check(r == 3, $sformatf("I0-3 read X = %0d, exp 3", r));
    check(l1_cts[0] == 15, $sformatf("cts of L1(GPU0) = %0d, exp 15", l1_cts[0]));
    access(NC, 0, Y, 0, r); check(r == 5, $sformatf("I1-3 read Y = %0d, exp 5", r));
    check(n_comp >= 4 && n_coh >= 1 && n_alloc >= 2 && n_extend >= 2,
          $sformatf("events comp %0d coh %0d alloc %0d extend %0d", n_comp, n_coh, n_alloc, n_extend));
    all_ready = 1;
    for (int i = 0; i < NCU; i++) if (!cu_req_ready[i]) all_ready = 0;
    check(all_ready, "all CUs idle and ready");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

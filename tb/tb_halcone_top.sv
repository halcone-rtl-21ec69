// tb_halcone_top: end-to-end test of the multi-GPU memory system.
//
// A reduced system (2 GPUs x 2 CUs, 2 L2 banks per GPU, 2 memory modules,
// 2-set 2-way caches and TSUs, 50-cycle TSU, 100-cycle DRAM) runs:
//   A. the intra-GPU example: two CUs of one GPU read X and Y, write Y=5 and
//      X=3, then read X and Y again;
//   B. the same with the two CUs on different GPUs (inter-GPU);
//   C. logical-time ordering: a read that hits a still-valid lease returns
//      the old value although another GPU has already written a new one;
//   D. random reads and writes from all CUs on private and shared words;
//   E. timestamp overflow, on a second 1-CU instance with extreme leases.
// Expected read values and timestamps of A-C were worked out by hand from
// the protocol rules with RdLease 10 and WrLease 5. In D a private word must
// read back the CU's own last write; a shared word any value ever written to
// it or its initial value. Every mechanism (hits, both miss kinds, evictions,
// TSU allocation/extension/eviction, overflow) must occur at least once.
module tb_halcone_top;
  import halcone_pkg::*;

  localparam int NG = 2, NC = 2, NB = 2, NM = 2;
  localparam int NCU = NG * NC, NBK = NG * NB;

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

  halcone_top #(
    .N_GPU(NG), .N_CU(NC), .N_L2(NB), .N_MEM(NM),
    .L1_SETS(2), .L1_WAYS(2), .L2_SETS(2), .L2_WAYS(2),
    .TSU_SETS(2), .TSU_WAYS(2), .TSU_LATENCY(50), .RD_LEASE(10), .WR_LEASE(5)
  ) dut (
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

  // Second instance for timestamp overflow: RdLease 65534, WrLease 1.
  logic      o_req_valid[1], o_req_ready[1], o_rsp_valid[1];
  cu_req_t   o_req[1];
  word_t     o_rsp_data[1];
  logic      odq_valid[1], odq_ready[1], odr_valid[1];
  dram_req_t odq[1];
  blk_t      odr_data[1];
  cts_t      o_l1_cts[1], o_l2_cts[1];
  cache_ev_t o_l1_ev[1], o_l2_ev[1];
  tsu_ev_t   o_tsu_ev[1];
  halcone_top #(
    .N_GPU(1), .N_CU(1), .N_L2(1), .N_MEM(1),
    .L1_SETS(2), .L1_WAYS(2), .L2_SETS(2), .L2_WAYS(2),
    .TSU_SETS(2), .TSU_WAYS(2), .TSU_LATENCY(50), .RD_LEASE(65534), .WR_LEASE(1)
  ) dut_ovf (
    .clk, .rst_n, .cu_req_valid(o_req_valid), .cu_req_ready(o_req_ready), .cu_req(o_req),
    .cu_rsp_valid(o_rsp_valid), .cu_rsp_data(o_rsp_data),
    .dram_req_valid(odq_valid), .dram_req_ready(odq_ready), .dram_req(odq),
    .dram_rsp_valid(odr_valid), .dram_rsp_data(odr_data),
    .l1_cts(o_l1_cts), .l2_cts(o_l2_cts), .l1_ev(o_l1_ev), .l2_ev(o_l2_ev), .tsu_ev(o_tsu_ev)
  );
  halcone_dram_model #(.LATENCY(100)) u_odram (
    .clk, .rst_n, .req_valid(odq_valid[0]), .req_ready(odq_ready[0]), .req(odq[0]),
    .rsp_valid(odr_valid[0]), .rsp_data(odr_data[0]));

  // ---- mechanism counters ----
  int n_l1_rd_hit, n_l1_wr_hit, n_l1_comp, n_l1_coh, n_l1_evict;
  int n_l2_rd_hit, n_l2_wr_hit, n_l2_comp, n_l2_coh, n_l2_evict, n_l2_ovf;
  int n_tsu_alloc, n_tsu_ext, n_tsu_full, n_tsu_l2ev, n_tsu_keep, n_tsu_ovf;
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NCU; i++) begin
      n_l1_rd_hit += l1_ev[i].rd_hit; n_l1_wr_hit += l1_ev[i].wr_hit;
      n_l1_comp += l1_ev[i].comp_miss; n_l1_coh += l1_ev[i].coh_miss;
      n_l1_evict += l1_ev[i].evict;
    end
    for (int i = 0; i < NBK; i++) begin
      n_l2_rd_hit += l2_ev[i].rd_hit; n_l2_wr_hit += l2_ev[i].wr_hit;
      n_l2_comp += l2_ev[i].comp_miss; n_l2_coh += l2_ev[i].coh_miss;
      n_l2_evict += l2_ev[i].evict; n_l2_ovf += l2_ev[i].ts_ovf;
    end
    for (int i = 0; i < NM; i++) begin
      n_tsu_alloc += tsu_ev[i].alloc; n_tsu_ext += tsu_ev[i].extend;
      n_tsu_full += tsu_ev[i].full_evict; n_tsu_l2ev += tsu_ev[i].l2_evict;
      n_tsu_keep += tsu_ev[i].shared_keep;
    end
    n_l2_ovf  += o_l2_ev[0].ts_ovf;
    n_tsu_ovf += o_tsu_ev[0].ovf;
  end

  // ---- CU access tasks ----
  task automatic access(int cu, bit we, logic [ADDR_W-1:0] addr, word_t wd, output word_t rd);
    @(negedge clk);
    cu_req_valid[cu] = 1'b1;
    cu_req[cu] = '{we: we, addr: addr, wdata: wd};
    do @(posedge clk); while (!cu_req_ready[cu]);
    @(negedge clk);
    cu_req_valid[cu] = 1'b0;
    while (!cu_rsp_valid[cu]) @(negedge clk);
    rd = cu_rsp_data[cu];
    @(negedge clk);   // let the cache update its clock
  endtask

  task automatic access_o(bit we, logic [ADDR_W-1:0] addr, word_t wd, output word_t rd);
    @(negedge clk);
    o_req_valid[0] = 1'b1;
    o_req[0] = '{we: we, addr: addr, wdata: wd};
    do @(posedge clk); while (!o_req_ready[0]);
    @(negedge clk);
    o_req_valid[0] = 1'b0;
    while (!o_rsp_valid[0]) @(negedge clk);
    rd = o_rsp_data[0];
    @(negedge clk);
  endtask

  function automatic word_t init_word(logic [ADDR_W-1:0] a);
    return word_t'(a >> 2);   // the DRAM model's initial content
  endfunction

  task automatic do_reset();
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
  endtask

  // ---- random phase bookkeeping ----
  word_t priv_last [NCU][16];
  word_t shared_vals[$];

  task automatic cu_random(int cu, int n);
    word_t r;
    for (int k = 0; k < n; k++) begin
      int sel = $urandom_range(0, 15);
      bit we  = $urandom_range(0, 1);
      bit shr = $urandom_range(0, 2) == 0;
      // private words: word cu of blocks 0..15 of a 2 KB region (false sharing
      // with other CUs in the same blocks); shared words: word 15 of blocks 0..15
      logic [ADDR_W-1:0] a;
      a = shr ? ADDR_W'(32'h0010_0000 + sel * 64 * 33 + 60)
              : ADDR_W'(32'h0010_0000 + sel * 64 * 33 + cu * 4);
      if (we) begin
        word_t v = {8'hC0 + 8'(cu), 24'(k)};
        access(cu, 1'b1, a, v, r);
        if (shr) shared_vals.push_back(v);
        else priv_last[cu][sel] = v;
      end else begin
        access(cu, 1'b0, a, '0, r);
        if (shr) begin
          bit found = (r == init_word(a));
          foreach (shared_vals[j]) if (shared_vals[j] == r) found = 1;
          check(found, $sformatf("cu%0d shared read %h got unknown %h", cu, a, r));
        end else begin
          check(r == priv_last[cu][sel],
                $sformatf("cu%0d private read %h got %h exp %h", cu, a, r, priv_last[cu][sel]));
        end
      end
    end
  endtask

  initial begin
    word_t r;
    logic [ADDR_W-1:0] X, Y;
    for (int i = 0; i < NCU; i++) begin cu_req_valid[i] = 0; cu_req[i] = '0; end
    o_req_valid[0] = 0; o_req[0] = '0;
    do_reset();

    // ---- A: intra-GPU, CU0 and CU1 of GPU0 ----
    X = 34'h0000; Y = 34'h0080;   // same L2 bank, as in the one-L2 example
    access(0, 0, X, 0, r); check(r == init_word(X), "A I0-1 read X");
    access(1, 0, Y, 0, r); check(r == init_word(Y), "A I1-1 read Y");
    check(l1_cts[0] == 0 && l1_cts[1] == 0, "A cts 0 after reads");
    access(0, 1, Y, 5, r);
    check(l1_cts[0] == 11, $sformatf("A cts of L1(CU0) after write Y = %0d, exp 11", l1_cts[0]));
    access(1, 1, X, 3, r);
    check(l1_cts[1] == 11, $sformatf("A cts of L1(CU1) after write X = %0d, exp 11", l1_cts[1]));
    access(0, 0, X, 0, r); check(r == 3, $sformatf("A I0-3 read X = %0d, exp 3", r));
    access(1, 0, Y, 0, r); check(r == 5, $sformatf("A I1-3 read Y = %0d, exp 5", r));

    // ---- B: inter-GPU, CU0 of GPU0 and CU0 of GPU1 ----
    do_reset();
    X = 34'h2000; Y = 34'h2080;
    access(0, 0, X, 0, r);  check(r == init_word(X), "B I0-1 read X");
    access(NC, 0, Y, 0, r); check(r == init_word(Y), "B I1-1 read Y");
    access(0, 1, Y, 5, r);
    access(NC, 1, X, 3, r);
    check(l1_cts[0] == 11 && l1_cts[NC] == 11, "B cts 11 after the writes");
    access(0, 0, X, 0, r);  check(r == 3, $sformatf("B I0-3 read X = %0d, exp 3", r));
    check(l1_cts[0] == 15, $sformatf("B cts of L1(GPU0) = %0d, exp 15", l1_cts[0]));
    access(NC, 0, Y, 0, r); check(r == 5, $sformatf("B I1-3 read Y = %0d, exp 5", r));

    // ---- C: a valid lease orders a read before another GPU's write ----
    do_reset();
    X = 34'h4000;
    access(0, 0, X, 0, r);  check(r == init_word(X), "C read X");
    access(NC, 1, X, 7, r);
    access(0, 0, X, 0, r);  check(r == init_word(X), "C lease hit returns old X");
    access(NC, 0, X, 0, r); check(r == 7, "C writer reads its own value");

    // ---- D: random traffic ----
    do_reset();
    for (int c = 0; c < NCU; c++)
      for (int s = 0; s < 16; s++)
        priv_last[c][s] = init_word(ADDR_W'(32'h0010_0000 + s * 64 * 33 + c * 4));
    fork
      cu_random(0, 120);
      cu_random(1, 120);
      cu_random(2, 120);
      cu_random(3, 120);
    join

    // ---- E: overflow on the second instance ----
    X = 34'h0000;
    access_o(0, X, 0, r);   check(r == init_word(X), "E read");
    access_o(1, X, 9, r);   // TSU gives wts 65535: the L2 timestamp overflows
    check(o_l2_cts[0] == 0, "E L2 cts re-initialised");
    access_o(1, X, 10, r);  // memts 65535 + 1 overflows in the TSU
    access_o(0, X, 0, r);   check(r == 10, "E read after overflow");

    // ---- every mechanism must have happened ----
    check(n_l1_rd_hit > 0, "L1 read hit");   check(n_l1_wr_hit > 0, "L1 write hit");
    check(n_l1_comp > 0, "L1 compulsory miss"); check(n_l1_coh > 0, "L1 coherency miss");
    check(n_l1_evict > 0, "L1 eviction");
    check(n_l2_rd_hit > 0, "L2 read hit");   check(n_l2_wr_hit > 0, "L2 write hit");
    check(n_l2_comp > 0, "L2 compulsory miss"); check(n_l2_coh > 0, "L2 coherency miss");
    check(n_l2_evict > 0, "L2 eviction");    check(n_l2_ovf > 0, "cache timestamp overflow");
    check(n_tsu_alloc > 0, "TSU allocation"); check(n_tsu_ext > 0, "TSU extension");
    check(n_tsu_full > 0, "TSU full-set eviction"); check(n_tsu_l2ev > 0, "TSU drop on L2 eviction");
    check(n_tsu_keep > 0, "TSU keep shared on L2 eviction"); check(n_tsu_ovf > 0, "TSU memts overflow");
    $display("mechanisms: L1 rd_hit=%0d wr_hit=%0d comp=%0d coh=%0d evict=%0d", n_l1_rd_hit,
             n_l1_wr_hit, n_l1_comp, n_l1_coh, n_l1_evict);
    $display("mechanisms: L2 rd_hit=%0d wr_hit=%0d comp=%0d coh=%0d evict=%0d ovf=%0d", n_l2_rd_hit,
             n_l2_wr_hit, n_l2_comp, n_l2_coh, n_l2_evict, n_l2_ovf);
    $display("mechanisms: TSU alloc=%0d extend=%0d full=%0d l2evict=%0d keep=%0d ovf=%0d",
             n_tsu_alloc, n_tsu_ext, n_tsu_full, n_tsu_l2ev, n_tsu_keep, n_tsu_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

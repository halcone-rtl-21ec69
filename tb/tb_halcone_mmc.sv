// tb_halcone_mmc: test of the memory controller with its TSU and a DRAM model.
//
// The controller (TSU 50 cycles, DRAM 100 cycles, RdLease 10, WrLease 5)
// serves a read, a write, an eviction notice and further reads from L2
// banks with different indices. Checked: the response goes to the bank that
// asked; the block is the DRAM content (with the write merged); the lease
// follows the TSU rules; the TSU lookup runs in parallel with the DRAM, so a
// response takes 101 cycles from acceptance (1 cycle to issue, 100 for the
// DRAM) and not 151; an eviction notice gets no response.
module tb_halcone_mmc;
  import halcone_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic net_req_valid, net_req_ready, net_rsp_valid, net_rsp_ready;
  mem_req_t net_req;
  logic [4:0] net_req_src, net_rsp_dst;
  mem_rsp_t net_rsp;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid;
  dram_req_t dram_req;
  blk_t dram_rsp_data;
  tsu_ev_t tsu_ev;

  halcone_mmc #(.N_L2(32), .N_MEM(4), .TSU_SETS(4), .TSU_WAYS(2), .TSU_LATENCY(50),
                .RD_LEASE(10), .WR_LEASE(5)) dut (.*);
  halcone_dram_model #(.LATENCY(100)) u_dram (
    .clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req(dram_req),
    .rsp_valid(dram_rsp_valid), .rsp_data(dram_rsp_data));

  function automatic blk_t init_blk(baddr_t a);
    blk_t b;
    for (int i = 0; i < WORDS; i++) b[i*WORD_W +: WORD_W] = {a, widx_t'(i)};
    return b;
  endfunction

  task automatic send(op_e o, baddr_t a, widx_t wi, word_t wd, ts_t r, int src,
                      output mem_rsp_t rsp, output int dst, output int lat);
    @(negedge clk);
    net_req_valid = 1; net_req = '{op: o, baddr: a, widx: wi, wdata: wd, rts: r};
    net_req_src = 5'(src);
    @(posedge clk);
    while (!net_req_ready) @(posedge clk);
    #1 net_req_valid = 0;
    lat = 0;
    while (!net_rsp_valid && lat < 400) begin @(posedge clk); #1; lat++; end
    rsp = net_rsp; dst = net_rsp_dst;
    @(posedge clk);
    #1;
  endtask

  initial begin
    mem_rsp_t rsp;
    int dst, lat;
    baddr_t A, B;
    blk_t exp_b;
    net_req_valid = 0; net_req = '0; net_req_src = 0; net_rsp_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    A = 28'h0000_105; B = 28'h0000_109;   // two blocks of module 0
    send(OP_RD, A, 0, 0, 0, 3, rsp, dst, lat);
    check(dst == 3, "read answers the asking bank");
    check(rsp.data == init_blk(A), "read data");
    check(rsp.rts == 10 && rsp.wts == 0, $sformatf("read lease %0d %0d", rsp.rts, rsp.wts));
    check(lat == 101, $sformatf("read latency %0d, exp 101", lat));
    send(OP_WR, A, 4'd7, 32'hDEAD_BEEF, 0, 17, rsp, dst, lat);
    exp_b = init_blk(A); exp_b[7*WORD_W +: WORD_W] = 32'hDEAD_BEEF;
    check(dst == 17, "write answers the asking bank");
    check(rsp.data == exp_b, "write returns the merged block");
    check(rsp.rts == 15 && rsp.wts == 11, $sformatf("write lease %0d %0d", rsp.rts, rsp.wts));
    check(lat == 101, $sformatf("write latency %0d", lat));
    send(OP_RD, B, 0, 0, 0, 31, rsp, dst, lat);
    check(dst == 31 && rsp.rts == 10 && rsp.wts == 0 && rsp.data == init_blk(B), "second block");
    send(OP_EVICT, A, 0, 0, 15, 3, rsp, dst, lat);
    check(lat >= 400, "eviction notice gets no response");
    check(net_req_ready, "controller idle after eviction");
    send(OP_RD, A, 0, 0, 0, 4, rsp, dst, lat);
    check(rsp.rts == 10 && rsp.wts == 0, $sformatf("lease restarts after eviction %0d %0d", rsp.rts, rsp.wts));
    check(rsp.data == exp_b, "DRAM keeps the written word");
    // stalled response path: the answer waits for ready
    net_rsp_ready = 0;
    fork
      send(OP_RD, B, 0, 0, 0, 9, rsp, dst, lat);
      begin repeat (150) @(posedge clk); check(net_rsp_valid && net_rsp_dst == 9, "response held"); net_rsp_ready = 1; end
    join
    check(rsp.rts == 20 && rsp.wts == 10, "extended lease");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

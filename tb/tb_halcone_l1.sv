// tb_halcone_l1: directed test of the L1 vector cache.
//
// The testbench plays the CU and the L2: every l2_req is accepted at once
// and answered 3 cycles later with the block from a word-level memory model
// (unwritten word = its word address) and with a lease {rts, wts} the test
// chooses. A small cache (2 sets x 2 ways) is used so that sets fill up.
// Checked: compulsory miss, lease hit without L2 traffic, write-through
// (every write goes to L2 with the right word), the new cts after a response
// (max(cts, wts)), the coherency miss once cts passes rts, LRU eviction, and
// the re-initialisation of cts after a timestamp overflow.
module tb_halcone_l1;
  import halcone_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic cu_req_valid, cu_req_ready, cu_rsp_valid;
  cu_req_t cu_req;
  word_t cu_rsp_data;
  logic l2_req_valid, l2_req_ready, l2_rsp_valid;
  mem_req_t l2_req;
  mem_rsp_t l2_rsp;
  cts_t cts;
  cache_ev_t ev;

  halcone_l1 #(.SETS(2), .WAYS(2)) dut (.*);

  word_t mem [int];
  function automatic word_t rd_word(baddr_t b, int i);
    int a;
    a = int'(b) * WORDS + i;
    return mem.exists(a) ? mem[a] : word_t'(a);
  endfunction

  // L2 model
  ts_t nxt_rts, nxt_wts;
  int n_l2 = 0;
  mem_req_t last_req;
  assign l2_req_ready = 1'b1;
  initial begin
    l2_rsp_valid = 0; l2_rsp = '0;
    forever begin
      @(negedge clk);
      if (rst_n && l2_req_valid) begin
        mem_req_t r;
        r = l2_req; last_req = r; n_l2++;
        if (r.op == OP_WR) mem[int'(r.baddr) * WORDS + int'(r.widx)] = r.wdata;
        repeat (3) @(posedge clk);
        #1;
        for (int i = 0; i < WORDS; i++) l2_rsp.data[i*WORD_W +: WORD_W] = rd_word(r.baddr, i);
        l2_rsp.rts = nxt_rts; l2_rsp.wts = nxt_wts;
        l2_rsp_valid = 1;
        @(posedge clk);
        #1 l2_rsp_valid = 0;
      end
    end
  end

  int n_ev_comp = 0, n_ev_coh = 0, n_ev_evict = 0, n_ev_ovf = 0, n_ev_rh = 0, n_ev_wh = 0;
  always @(posedge clk) if (rst_n) begin
    n_ev_comp += ev.comp_miss; n_ev_coh += ev.coh_miss; n_ev_evict += ev.evict;
    n_ev_ovf += ev.ts_ovf; n_ev_rh += ev.rd_hit; n_ev_wh += ev.wr_hit;
  end

  // One CU access; returns the answer and whether it went to L2.
  task automatic access(bit we, baddr_t b, int wi, word_t wd, output word_t data, output bit went);
    int n0;
    n0 = n_l2;
    @(negedge clk);
    cu_req_valid = 1; cu_req = '{we: we, addr: {b, widx_t'(wi), 2'b00}, wdata: wd};
    @(posedge clk);
    while (!cu_req_ready) @(posedge clk);
    @(negedge clk);
    cu_req_valid = 0;
    while (!cu_rsp_valid) @(negedge clk);
    data = cu_rsp_data;
    @(negedge clk);
    went = (n_l2 != n0);
  endtask

  initial begin
    word_t d;
    bit went;
    cu_req_valid = 0; cu_req = '0; nxt_rts = 10; nxt_wts = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1. compulsory miss
    access(0, 28'd1, 5, 0, d, went);
    check(went && last_req.op == OP_RD && last_req.baddr == 1, "read miss goes to L2");
    check(d == rd_word(1, 5), "read miss data");
    check(cts == 0, "cts after first read");
    // 2. lease hit
    access(0, 28'd1, 6, 0, d, went);
    check(!went && d == rd_word(1, 6), "read hit served locally");
    // 3. write hit: write-through with new lease [11,15]
    nxt_rts = 15; nxt_wts = 11;
    access(1, 28'd1, 3, 32'hCAFE_0001, d, went);
    check(went && last_req.op == OP_WR && last_req.widx == 3 && last_req.wdata == 32'hCAFE_0001,
          "write goes through to L2");
    check(cts == 11, $sformatf("cts after write %0d, exp 11", cts));
    access(0, 28'd1, 3, 0, d, went);
    check(!went && d == 32'hCAFE_0001, "written word read back from L1");
    // 4. another block of set 1 with a later lease moves cts past rts 15
    nxt_rts = 30; nxt_wts = 20;
    access(0, 28'd3, 0, 0, d, went);
    check(went && cts == 20, $sformatf("cts %0d, exp 20", cts));
    // 5. coherency miss: tag matches, lease expired
    mem[1 * WORDS + 3] = 32'hBEEF_0002;   // another writer changed it in L2
    nxt_rts = 40; nxt_wts = 25;
    access(0, 28'd1, 3, 0, d, went);
    check(went && d == 32'hBEEF_0002, "coherency miss fetches the new value");
    check(cts == 25, "cts after coherency miss");
    // 6. write miss: allocates the block returned by L2 (LRU victim is block 3)
    nxt_rts = 60; nxt_wts = 26;
    access(1, 28'd5, 1, 32'h0000_0555, d, went);
    check(went && last_req.op == OP_WR && last_req.baddr == 5, "write miss goes to L2");
    access(0, 28'd5, 1, 0, d, went);
    check(!went && d == 32'h0000_0555, "write miss allocated the block");
    access(0, 28'd1, 3, 0, d, went);
    check(!went, "block 1 (recently used) kept");
    access(0, 28'd3, 0, 0, d, went);
    check(went, "block 3 (least recently used) was evicted");
    // 7. timestamp overflow: Brts = wts + 1 does not fit
    nxt_rts = 16'hFFFF; nxt_wts = 16'hFFFF;
    access(0, 28'd0, 2, 0, d, went);
    check(went && d == rd_word(0, 2), "overflow response still answers");
    check(cts == 0, "cts re-initialised after overflow");
    nxt_rts = 70; nxt_wts = 0;
    access(0, 28'd0, 2, 0, d, went);
    check(went, "overflowed block was not kept");
    check(n_ev_comp > 0 && n_ev_coh > 0 && n_ev_evict > 0 && n_ev_ovf == 1 && n_ev_rh > 0 && n_ev_wh > 0,
          $sformatf("event outputs %0d %0d %0d %0d %0d %0d", n_ev_comp, n_ev_coh, n_ev_evict, n_ev_ovf, n_ev_rh, n_ev_wh));
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

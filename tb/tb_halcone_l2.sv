// tb_halcone_l2: directed test of one L2 bank.
//
// The testbench plays the L1s and the memory modules. Memory requests are
// accepted at once and logged; reads and writes are answered 3 cycles later
// with the block from a word-level memory model (unwritten word = its word
// address) and a lease {rts, wts} the test chooses; eviction notices get no
// answer. The bank is small (2 sets x 2 ways, 2 banks, 2 memory modules) so
// that sets fill up. Checked: the answer goes to the asking L1; compulsory
// miss; lease hit without memory traffic; write-through; lease arithmetic
// (Brts = max(wts+1, rts), cts = max(cts, wts)); coherency miss; the eviction
// notice {victim address, its rts} sent to the victim's memory module before
// the new request; and the overflow answer {rts 0, wts 0} with cts reset.
module tb_halcone_l2;
  import halcone_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic up_req_valid, up_req_ready, up_rsp_valid, up_rsp_ready;
  mem_req_t up_req;
  logic [1:0] up_req_src, up_rsp_dst;
  mem_rsp_t up_rsp;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  logic mem_req_dst;
  mem_rsp_t mem_rsp;
  cts_t cts;
  cache_ev_t ev;

  halcone_l2 #(.SETS(2), .WAYS(2), .N_SRC(4), .N_BANK(2), .N_MEM(2)) dut (.*);

  word_t mem [int];
  function automatic word_t rd_word(baddr_t b, int i);
    int a;
    a = int'(b) * WORDS + i;
    return mem.exists(a) ? mem[a] : word_t'(a);
  endfunction

  // Memory model
  ts_t nxt_rts, nxt_wts;
  mem_req_t log_req[$];
  int log_dst[$];
  assign mem_req_ready = 1'b1;
  initial begin
    mem_rsp_valid = 0; mem_rsp = '0;
    forever begin
      @(negedge clk);
      if (rst_n && mem_req_valid) begin
        mem_req_t r;
        r = mem_req; log_req.push_back(r); log_dst.push_back(int'(mem_req_dst));
        if (r.op == OP_WR) mem[int'(r.baddr) * WORDS + int'(r.widx)] = r.wdata;
        if (r.op != OP_EVICT) begin
          repeat (3) @(posedge clk);
          #1;
          for (int i = 0; i < WORDS; i++) mem_rsp.data[i*WORD_W +: WORD_W] = rd_word(r.baddr, i);
          mem_rsp.rts = nxt_rts; mem_rsp.wts = nxt_wts;
          mem_rsp_valid = 1;
          @(posedge clk);
          #1 mem_rsp_valid = 0;
        end
      end
    end
  end

  int n_comp = 0, n_coh = 0, n_evict = 0, n_ovf = 0, n_rh = 0, n_wh = 0;
  always @(posedge clk) if (rst_n) begin
    n_comp += ev.comp_miss; n_coh += ev.coh_miss; n_evict += ev.evict;
    n_ovf += ev.ts_ovf; n_rh += ev.rd_hit; n_wh += ev.wr_hit;
  end

  task automatic access(op_e o, baddr_t b, int wi, word_t wd, int src, output mem_rsp_t rsp, output int dst);
    @(negedge clk);
    log_req.delete(); log_dst.delete();
    up_req_valid = 1; up_req = '{op: o, baddr: b, widx: widx_t'(wi), wdata: wd, rts: '0};
    up_req_src = 2'(src);
    @(posedge clk);
    while (!up_req_ready) @(posedge clk);
    #1 up_req_valid = 0;
    while (!up_rsp_valid) @(negedge clk);
    rsp = up_rsp; dst = int'(up_rsp_dst);
    @(posedge clk);
    #1;
  endtask

  function automatic blk_t exp_blk(baddr_t b);
    for (int i = 0; i < WORDS; i++) exp_blk[i*WORD_W +: WORD_W] = rd_word(b, i);
  endfunction

  initial begin
    mem_rsp_t r;
    int dst;
    up_req_valid = 0; up_req = '0; up_req_src = 0; up_rsp_ready = 1;
    nxt_rts = 10; nxt_wts = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Blocks 4, 8 and 12 (module 0) and 64 (module 1) all map to set 0 of bank 0.
    access(OP_RD, 28'd4, 0, 0, 2, r, dst);
    check(dst == 2 && r.data == exp_blk(4), "read miss answer");
    check(log_req.size() == 1 && log_req[0].op == OP_RD && log_req[0].baddr == 4 && log_dst[0] == 0,
          "read miss request to module 0");
    check(r.rts == 10 && r.wts == 0 && cts == 0, "lease [0,10]");
    access(OP_RD, 28'd4, 0, 0, 1, r, dst);
    check(dst == 1 && log_req.size() == 0 && r.rts == 10 && r.data == exp_blk(4), "lease hit");
    nxt_rts = 15; nxt_wts = 11;
    access(OP_WR, 28'd4, 2, 32'h1234_5678, 3, r, dst);
    check(log_req.size() == 1 && log_req[0].op == OP_WR && log_req[0].widx == 2 &&
          log_req[0].wdata == 32'h1234_5678, "write through");
    check(dst == 3 && r.rts == 15 && r.wts == 11 && cts == 11, "write lease [11,15]");
    check(r.data[2*WORD_W +: WORD_W] == 32'h1234_5678, "write answer holds the word");
    nxt_rts = 30; nxt_wts = 20;
    access(OP_RD, 28'd64, 0, 0, 0, r, dst);
    check(log_req.size() == 1 && log_dst[0] == 1, "block 64 lives in module 1");
    check(r.rts == 30 && r.wts == 20 && cts == 20, "cts moves to 20");
    nxt_rts = 40; nxt_wts = 25;
    mem[4 * WORDS + 7] = 32'hAAAA_0007;
    access(OP_RD, 28'd4, 0, 0, 0, r, dst);
    check(log_req.size() == 1 && log_req[0].op == OP_RD, "coherency miss refetches");
    check(r.data == exp_blk(4) && r.rts == 40 && r.wts == 25 && cts == 25, "coherency miss answer");
    // Set 0 now holds 4 (just used) and 64: block 8 evicts 64.
    nxt_rts = 50; nxt_wts = 26;
    access(OP_RD, 28'd8, 0, 0, 0, r, dst);
    check(log_req.size() == 2, "eviction notice and read");
    if (log_req.size() == 2) begin
      check(log_req[0].op == OP_EVICT && log_req[0].baddr == 64 && log_req[0].rts == 30 && log_dst[0] == 1,
            "eviction notice of block 64 with its rts to module 1");
      check(log_req[1].op == OP_RD && log_req[1].baddr == 8, "then the read");
    end
    access(OP_RD, 28'd4, 0, 0, 0, r, dst);
    check(log_req.size() == 0, "block 4 kept");
    // Brts = max(wts+1, rts): wts 60 and rts 40 give 61
    nxt_rts = 40; nxt_wts = 60;
    access(OP_RD, 28'd3, 0, 0, 0, r, dst);
    check(r.rts == 61 && r.wts == 60 && cts == 60, $sformatf("Brts = wts+1: %0d %0d", r.rts, r.wts));
    // overflow
    nxt_rts = 16'hFFFF; nxt_wts = 16'hFFFF;
    access(OP_RD, 28'd1, 0, 0, 0, r, dst);
    check(r.rts == 0 && r.wts == 0 && cts == 0 && r.data == exp_blk(1), "overflow answer");
    nxt_rts = 70; nxt_wts = 0;
    access(OP_RD, 28'd1, 0, 0, 0, r, dst);
    check(log_req.size() == 1, "overflowed block not kept");
    check(n_comp > 0 && n_coh > 0 && n_evict > 0 && n_ovf == 1 && n_rh > 0 && n_wh > 0,
          $sformatf("event outputs %0d %0d %0d %0d %0d %0d", n_comp, n_coh, n_evict, n_ovf, n_rh, n_wh));
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

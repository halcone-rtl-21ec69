// tb_halcone_tsu: directed test of the timestamp storage unit.
//
// A 4-set, 2-way TSU with a 5-cycle latency, RdLease 10 and WrLease 5 is
// driven through: first read (new entry), repeated read (lease extended),
// write, a full set (lowest memts dropped), an L2 eviction of an unshared
// block (entry dropped) and of a shared one (entry kept), and a memts
// overflow after thousands of reads of one block. Every answer's Mrts/Mwts
// is compared with values worked out from the update rules, and the answer
// must come exactly LATENCY cycles after the request.
module tb_halcone_tsu;
  import halcone_pkg::*;
  localparam int LAT = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic req_valid, req_ready, rsp_valid;
  op_e req_op;
  baddr_t req_baddr;
  ts_t req_rts, rsp_rts, rsp_wts;
  tsu_ev_t ev;
  tsu_ev_t ev_seen;

  halcone_tsu #(.SETS(4), .WAYS(2), .LATENCY(LAT), .RD_LEASE(10), .WR_LEASE(5)) dut (.*);

  always @(posedge clk) if (rst_n && req_valid && req_ready) ev_seen <= ev;

  // Send one request; return the timestamps and the latency in cycles.
  task automatic op(op_e o, baddr_t a, ts_t r, output ts_t rts, output ts_t wts);
    int n;
    @(negedge clk);
    req_valid = 1; req_op = o; req_baddr = a; req_rts = r;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    #1 req_valid = 0;
    n = 0;
    while (!rsp_valid) begin @(posedge clk); #1; n++; end
    rts = rsp_rts; wts = rsp_wts;
    // rsp_valid is sampled at the LAT-th clock edge after the accepting one
    check(n + 1 == LAT, $sformatf("latency %0d, exp %0d", n + 1, LAT));
    @(posedge clk);
  endtask

  initial begin
    ts_t r, w;
    req_valid = 0; req_op = OP_RD; req_baddr = '0; req_rts = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // A = 4, B = 8, C = 12 all fall in set 0.
    op(OP_RD, 4, 0, r, w);  check(r == 10 && w == 0,  $sformatf("read A new: %0d %0d", r, w));
    check(ev_seen.alloc, "alloc event");
    op(OP_RD, 4, 0, r, w);  check(r == 20 && w == 10, $sformatf("read A again: %0d %0d", r, w));
    check(ev_seen.extend, "extend event");
    op(OP_WR, 4, 0, r, w);  check(r == 25 && w == 21, $sformatf("write A: %0d %0d", r, w));
    op(OP_WR, 8, 0, r, w);  check(r == 5 && w == 1,   $sformatf("write B new: %0d %0d", r, w));
    op(OP_RD, 12, 0, r, w); check(r == 10 && w == 0,  $sformatf("read C, set full: %0d %0d", r, w));
    check(ev_seen.full_evict, "full-set eviction event");
    // B (memts 5) was the lowest and is gone; A (25) must still be there.
    op(OP_RD, 4, 0, r, w);  check(r == 35 && w == 25, $sformatf("A kept: %0d %0d", r, w));
    op(OP_RD, 8, 0, r, w);  check(r == 10 && w == 0,  $sformatf("B re-allocated: %0d %0d", r, w));
    // Now A = 35, B = 10; C (10) was dropped when B came back.
    op(OP_EVICT, 4, 35, r, w);
    check(ev_seen.l2_evict, "L2 eviction drops unshared entry");
    op(OP_RD, 4, 0, r, w);  check(r == 10 && w == 0,  $sformatf("A after drop: %0d %0d", r, w));
    op(OP_EVICT, 8, 5, r, w);
    check(ev_seen.shared_keep, "L2 eviction keeps shared entry");
    op(OP_RD, 8, 0, r, w);  check(r == 20 && w == 10, $sformatf("B kept: %0d %0d", r, w));
    // Other sets are independent.
    op(OP_RD, 5, 0, r, w);  check(r == 10 && w == 0,  "set 1 independent");
    // Overflow: block 6 read until memts would pass 65535.
    for (int k = 1; k <= 6553; k++) op(OP_RD, 6, 0, r, w);
    check(r == 65530 && w == 65520, $sformatf("before overflow: %0d %0d", r, w));
    op(OP_RD, 6, 0, r, w);
    check(r == 10 && w == 0, $sformatf("after overflow: %0d %0d", r, w));
    check(ev_seen.ovf, "overflow event");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

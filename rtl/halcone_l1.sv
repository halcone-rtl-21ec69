// halcone_l1: private L1 vector cache of one CU, with HALCONE timestamps.
//
// A set-associative, write-through cache (16 KB, 4 ways, 64-byte blocks by
// default, as in the paper). Each block holds data, a tag, and a lease
// [wts, rts]; the cache keeps one logical clock cts, which starts at 0. It
// follows Algorithms 1 and 4 of the paper:
//   read : hit when the tag matches and cts <= rts. Otherwise (compulsory
//          miss, or coherency miss when the lease has expired) the block is
//          fetched from L2 with a new lease.
//   write: always forwarded to L2 (write-through). On a lease hit the word is
//          written into the block at once; on a miss the block returned by
//          L2, which already holds the write, is filled in (write-allocate).
// On every L2 response: Bwts = max(cts, wts), Brts = max(wts + 1, rts),
// cts = max(cts, Bwts). The paper's algorithm only advances cts on writes,
// but its text and example advance it on read fills too; this design does it
// on both. If a new timestamp does not fit in 16 bits, cts is re-initialised
// to 0 and the block is left invalid, so only that block misses later.
//
// The cache is blocking: while a request waits for L2 it holds the only MSHR
// entry, which is also the lock the paper places on a written block. LRU
// replacement uses a per-line last-use stamp; both are this design's choices.
// A line keeps {valid, tag, rts, data}: the paper also lists wts per block,
// but nothing in the L1 reads it, so it is not stored (Bwts only moves cts).
// Only the valid bits are reset; the other arrays are written in a separate
// clocked process without reset, so that synthesis keeps them as RAMs.
//
// Interface and timing: cu_req valid/ready (ready in the idle state only);
// the tag check happens the cycle after acceptance, and a hit answers on
// cu_rsp_valid in that cycle (2 cycles after the request). Misses and writes
// issue one l2_req (valid/ready) and answer the CU in the cycle an l2_rsp
// arrives. A write answers with the word written, as its acknowledgement.
// The rts field of l2_req is only meaningful for L2 eviction notices and is
// always 0 here.
module halcone_l1
  import halcone_pkg::*;
#(
  parameter int unsigned SETS = 64,
  parameter int unsigned WAYS = 4,
  localparam int unsigned IDX_W = $clog2(SETS),
  localparam int unsigned TAG_W = BADDR_W - IDX_W,
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     cu_req_valid,
  output logic     cu_req_ready,
  input  cu_req_t  cu_req,
  output logic     cu_rsp_valid,
  output word_t    cu_rsp_data,
  output logic     l2_req_valid,
  input  logic     l2_req_ready,
  output mem_req_t l2_req,
  input  logic     l2_rsp_valid,
  input  mem_rsp_t l2_rsp,
  output cts_t     cts,
  output cache_ev_t ev
);

  localparam int unsigned TS_MAX = (1 << TS_W) - 1;

  typedef enum logic [1:0] {S_IDLE, S_LOOK, S_REQ, S_WAIT} state_e;
  state_e st_q;

  logic [SETS*WAYS-1:0] vld_q;   // valid bits, line s*WAYS+w
  logic [TAG_W-1:0] tag_q [SETS][WAYS];
  ts_t              rts_q [SETS][WAYS];
  blk_t             dat_q [SETS][WAYS];
  logic [15:0]      use_q [SETS][WAYS];
  logic [15:0]      clk_use_q;
  cts_t             cts_q;

  cu_req_t          req_q;
  logic [WAY_W-1:0] way_q;

  baddr_t           baddr;
  widx_t            widx;
  logic [IDX_W-1:0] idx;
  logic [TAG_W-1:0] tag;
  assign baddr = req_q.addr[ADDR_W-1:OFF_W];
  assign widx  = req_q.addr[OFF_W-1:2];
  assign idx   = baddr[IDX_W-1:0];
  assign tag   = baddr[BADDR_W-1:IDX_W];

  // Tag check, lease check and victim choice for the request in req_q.
  logic             tm, has_free, lease_ok;
  logic [WAY_W-1:0] tm_way, free_way, lru_way, vict_way;
  always_comb begin
    tm = 1'b0; tm_way = '0; has_free = 1'b0; free_way = '0; lru_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (vld_q[int'(idx) * WAYS + int'(w)] && tag_q[idx][w] == tag && !tm) begin
        tm = 1'b1; tm_way = WAY_W'(w);
      end
      if (!vld_q[int'(idx) * WAYS + int'(w)] && !has_free) begin
        has_free = 1'b1; free_way = WAY_W'(w);
      end
      if (use_q[idx][w] < use_q[idx][lru_way]) lru_way = WAY_W'(w);
    end
    vict_way = has_free ? free_way : lru_way;
    lease_ok = tm && (cts_q <= cts_t'(rts_q[idx][tm_way]));
  end

  // Lease arithmetic on an L2 response.
  logic [CTS_W-1:0] bwts;
  logic [TS_W:0]    brts;
  logic             ovf;
  always_comb begin
    bwts = (cts_q > cts_t'(l2_rsp.wts)) ? cts_q : cts_t'(l2_rsp.wts);
    brts = ({1'b0, l2_rsp.wts} + 1'b1 > {1'b0, l2_rsp.rts}) ?
           {1'b0, l2_rsp.wts} + 1'b1 : {1'b0, l2_rsp.rts};
    ovf  = (bwts > cts_t'(TS_MAX)) || (brts > (TS_W+1)'(TS_MAX));
  end

  logic look_hit_rd, look_hit_wr, rsp_in;
  assign look_hit_rd = (st_q == S_LOOK) && !req_q.we && lease_ok;
  assign look_hit_wr = (st_q == S_LOOK) &&  req_q.we && lease_ok;
  assign rsp_in      = (st_q == S_WAIT) && l2_rsp_valid;

  assign cu_req_ready = (st_q == S_IDLE);
  assign cu_rsp_valid = look_hit_rd || rsp_in;
  assign cu_rsp_data  = rsp_in ? blk_word(l2_rsp.data, widx)
                               : blk_word(dat_q[idx][tm_way], widx);
  assign l2_req_valid = (st_q == S_REQ);
  assign l2_req       = '{op: req_q.we ? OP_WR : OP_RD, baddr: baddr, widx: widx,
                          wdata: req_q.wdata, rts: '0};
  assign cts          = cts_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q      <= S_IDLE;
      cts_q     <= '0;
      clk_use_q <= '0;
      req_q     <= '0;
      way_q     <= '0;
      vld_q     <= '0;
    end else begin
      case (st_q)
        S_IDLE: if (cu_req_valid) begin
          req_q <= cu_req;
          st_q  <= S_LOOK;
        end
        S_LOOK: begin
          clk_use_q <= clk_use_q + 1'b1;
          if (look_hit_rd) begin
            st_q <= S_IDLE;
          end else begin
            way_q <= tm ? tm_way : vict_way;
            st_q  <= S_REQ;
          end
        end
        S_REQ: if (l2_req_ready) st_q <= S_WAIT;
        S_WAIT: if (l2_rsp_valid) begin
          if (ovf) begin
            cts_q <= '0;
            vld_q[int'(idx) * WAYS + int'(way_q)] <= 1'b0;
          end else begin
            vld_q[int'(idx) * WAYS + int'(way_q)] <= 1'b1;
            cts_q <= bwts;   // = max(cts, Bwts)
          end
          st_q <= S_IDLE;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  // Tag, lease, data and LRU arrays. They are not reset (a line is only
  // read once its valid bit is set), so that they can be built as RAMs.
  always_ff @(posedge clk) begin
    if ((st_q == S_LOOK) && lease_ok) use_q[idx][tm_way] <= clk_use_q;
    // Write hit: the word goes into the block now; the block stays locked
    // (the cache is busy) until L2 returns the new lease.
    if (look_hit_wr)
      dat_q[idx][tm_way] <= blk_put(dat_q[idx][tm_way], widx, req_q.wdata);
    if (rsp_in && !ovf) begin
      tag_q[idx][way_q] <= tag;
      rts_q[idx][way_q] <= ts_t'(brts);
      dat_q[idx][way_q] <= l2_rsp.data;
      use_q[idx][way_q] <= clk_use_q;
    end
  end

  always_comb begin
    ev = '0;
    if (st_q == S_LOOK) begin
      ev.rd_hit    = look_hit_rd;
      ev.wr_hit    = look_hit_wr;
      ev.comp_miss = !tm;
      ev.coh_miss  = tm && !lease_ok;
      ev.evict     = !tm && !has_free;
    end
    if (rsp_in) ev.ts_ovf = ovf;
  end

  // Only one request is ever outstanding, so a response outside S_WAIT is a
  // protocol error of the L2 side.
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    l2_rsp_valid |-> st_q == S_WAIT);

endmodule

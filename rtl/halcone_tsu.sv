// halcone_tsu: timestamp storage unit of one memory module.
//
// The TSU holds no data, only a memts (memory timestamp) for each block that
// the L2 caches of any GPU have recently been given a lease on. It is an
// 8-way set-associative table of {valid, tag, memts}, with 16-bit memts, as
// in the paper. Per request (Algorithm 3 of the paper, see notes below):
//   read : memts += RdLease;  Mrts = memts;  Mwts = Mrts - RdLease
//   write: Mwts = memts + 1;  memts += WrLease;  Mrts = memts
//   evict: an L2 dropped the block; the entry is dropped too unless another
//          lease was granted after the evicted copy's (memts > its rts), in
//          which case the block is taken to be shared and kept.
// A missing entry starts from memts = 0. A full set gives up the way with
// the lowest memts. If adding a lease would overflow 16 bits the entry is
// re-initialised to 0 first.
//
// The write rule follows the example timeline of the paper (old memts 7
// gives wts 8, rts 12), not its Algorithm 3, which would give a write the
// same logical time as the end of the last read lease. The sharing test on
// eviction is this design's reading of "within one lease period".
// Only the valid bits are reset; the other arrays are written in a separate
// clocked process without reset, so that synthesis keeps them as RAMs.
//
// Interface: req_valid/req_ready handshake; the table is read and updated in
// the accepting cycle; rsp_valid pulses LATENCY cycles later (50 by default,
// the access latency the paper assumes) with Mrts/Mwts. One request at a time.
module halcone_tsu
  import halcone_pkg::*;
#(
  parameter int unsigned SETS     = 512,
  parameter int unsigned WAYS     = 8,
  parameter int unsigned LATENCY  = 50,
  parameter int unsigned RD_LEASE = RD_LEASE_DEF,
  parameter int unsigned WR_LEASE = WR_LEASE_DEF,
  localparam int unsigned IDX_W   = $clog2(SETS),
  localparam int unsigned TAG_W   = BADDR_W - IDX_W,
  localparam int unsigned WAY_W   = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   req_valid,
  output logic   req_ready,
  input  op_e    req_op,
  input  baddr_t req_baddr,   // block address local to this module
  input  ts_t    req_rts,     // OP_EVICT: rts of the evicted L2 copy
  output logic   rsp_valid,
  output ts_t    rsp_rts,
  output ts_t    rsp_wts,
  output tsu_ev_t ev
);

  localparam int unsigned TS_MAX = (1 << TS_W) - 1;

  logic [SETS*WAYS-1:0] vld_q;   // valid bits, line s*WAYS+w
  logic [TAG_W-1:0] tag_q  [SETS][WAYS];
  ts_t              mts_q  [SETS][WAYS];

  logic [IDX_W-1:0] idx;
  logic [TAG_W-1:0] tag;
  assign idx = req_baddr[IDX_W-1:0];
  assign tag = req_baddr[BADDR_W-1:IDX_W];

  // Lookup and victim choice.
  logic             hit, has_free;
  logic [WAY_W-1:0] hit_way, free_way, low_way, way;
  always_comb begin
    hit = 1'b0; hit_way = '0; has_free = 1'b0; free_way = '0; low_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (vld_q[int'(idx) * WAYS + int'(w)] && tag_q[idx][w] == tag && !hit) begin
        hit = 1'b1; hit_way = WAY_W'(w);
      end
      if (!vld_q[int'(idx) * WAYS + int'(w)] && !has_free) begin
        has_free = 1'b1; free_way = WAY_W'(w);
      end
      if (mts_q[idx][w] < mts_q[idx][low_way]) low_way = WAY_W'(w);
    end
    way = hit ? hit_way : (has_free ? free_way : low_way);
  end

  // New timestamps.
  logic [TS_W:0] old_m, lease, sum;
  logic          ovf;
  ts_t           new_m, m_rts, m_wts;
  always_comb begin
    old_m = hit ? {1'b0, mts_q[idx][hit_way]} : '0;
    lease = (req_op == OP_WR) ? (TS_W+1)'(WR_LEASE) : (TS_W+1)'(RD_LEASE);
    sum   = old_m + lease;
    ovf   = sum > (TS_W+1)'(TS_MAX);
    if (ovf) old_m = '0;
    new_m = ts_t'(old_m + lease);
    m_rts = new_m;
    if (req_op == OP_WR) m_wts = ts_t'(old_m + 1);
    else                 m_wts = ts_t'(old_m);
  end

  logic busy_q;
  logic [$clog2(LATENCY+1)-1:0] cnt_q;
  ts_t rts_q, wts_q;
  logic accept;
  assign req_ready = !busy_q;
  assign accept    = req_valid && req_ready;

  logic upd;
  assign upd = accept && (req_op != OP_EVICT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q     <= '0;
      busy_q <= 1'b0;
      cnt_q  <= '0;
      rts_q  <= '0;
      wts_q  <= '0;
    end else begin
      if (accept) begin
        busy_q <= 1'b1;
        cnt_q  <= ($clog2(LATENCY+1))'(LATENCY - 1);
        if (req_op == OP_EVICT) begin
          if (hit && mts_q[idx][hit_way] <= req_rts) vld_q[int'(idx) * WAYS + int'(hit_way)] <= 1'b0;
          rts_q <= '0;
          wts_q <= '0;
        end else begin
          vld_q[int'(idx) * WAYS + int'(way)] <= 1'b1;
          rts_q <= m_rts;
          wts_q <= m_wts;
        end
      end else if (busy_q) begin
        if (cnt_q == 0) busy_q <= 1'b0;
        else            cnt_q  <= cnt_q - 1'b1;
      end
    end
  end

  // Tag and memts arrays, not reset (an entry is only used once valid), so
  // that they can be built as RAMs.
  always_ff @(posedge clk) begin
    if (upd) begin
      tag_q[idx][way] <= tag;
      mts_q[idx][way] <= new_m;
    end
  end

  assign rsp_valid = busy_q && cnt_q == 0;
  assign rsp_rts   = rts_q;
  assign rsp_wts   = wts_q;

  always_comb begin
    ev = '0;
    if (accept) begin
      if (req_op == OP_EVICT) begin
        ev.l2_evict    = hit && mts_q[idx][hit_way] <= req_rts;
        ev.shared_keep = hit && mts_q[idx][hit_way] >  req_rts;
      end else begin
        ev.alloc      = !hit;
        ev.extend     = hit;
        ev.full_evict = !hit && !has_free;
        ev.ovf        = ovf;
      end
    end
  end

endmodule

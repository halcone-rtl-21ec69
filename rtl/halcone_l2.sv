// halcone_l2: one shared L2 bank of a GPU, with its cache controller.
//
// A set-associative, write-through cache (256 KB, 16 ways, 64-byte blocks by
// default, as in the paper) shared by the L1s of one GPU through the XBar.
// It keeps its own logical clock cts and a lease [wts, rts] per block, and
// follows Algorithms 2 and 5 of the paper:
//   read : a hit (tag match and cts <= rts) returns the block with its lease.
//          A compulsory miss, or a coherency miss (tag match, cts > rts),
//          fetches the block and a new lease from main memory; the re-fetch
//          on a coherency miss is what makes writes of other GPUs visible.
//   write: always forwarded to main memory (write-through). On a lease hit
//          the word is written into the block at once; on a miss the block
//          returned by memory is filled in (write-allocate).
// On every memory response: Bwts = max(cts, Mwts), Brts = max(Mwts+1, Mrts),
// cts = max(cts, Bwts), and the L1 gets {block, Brts, Bwts}. When a miss
// replaces a valid block, an eviction notice {address, rts} is first sent to
// the memory module, so that its TSU can drop the block's entry. Timestamp
// overflow re-initialises cts to 0 and leaves the filled block invalid.
//
// Like the L1, the bank is blocking (one request at a time; the single MSHR
// entry is the block lock) and uses a per-line last-use stamp for LRU; these
// and the message formats are this design's choices.
// Only the valid bits are reset; the other arrays are written in a separate
// clocked process without reset, so that synthesis keeps them as RAMs.
//
// Interface and timing: up_req valid/ready with the index of the sending L1;
// up_rsp valid/ready with the destination L1 index. A hit answers 2 cycles
// after acceptance. mem_req valid/ready with the destination memory module
// (4 KB page interleaving); mem_rsp arrives as a valid pulse.
module halcone_l2
  import halcone_pkg::*;
#(
  parameter int unsigned SETS   = 256,
  parameter int unsigned WAYS   = 16,
  parameter int unsigned N_SRC  = 32,   // L1s of the GPU
  parameter int unsigned N_BANK = 8,    // L2 banks of the GPU
  parameter int unsigned N_MEM  = 32,   // memory modules of the system
  localparam int unsigned BANK_W = (N_BANK > 1) ? $clog2(N_BANK) : 0,
  localparam int unsigned IDX_W  = $clog2(SETS),
  localparam int unsigned TAG_W  = BADDR_W - IDX_W - BANK_W,
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned SW     = (N_SRC > 1) ? $clog2(N_SRC) : 1,
  localparam int unsigned MW     = (N_MEM > 1) ? $clog2(N_MEM) : 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     up_req_valid,
  output logic     up_req_ready,
  input  mem_req_t up_req,
  input  logic [SW-1:0] up_req_src,
  output logic     up_rsp_valid,
  input  logic     up_rsp_ready,
  output mem_rsp_t up_rsp,
  output logic [SW-1:0] up_rsp_dst,
  output logic     mem_req_valid,
  input  logic     mem_req_ready,
  output mem_req_t mem_req,
  output logic [MW-1:0] mem_req_dst,
  input  logic     mem_rsp_valid,
  input  mem_rsp_t mem_rsp,
  output cts_t     cts,
  output cache_ev_t ev
);

  localparam int unsigned TS_MAX = (1 << TS_W) - 1;

  typedef enum logic [2:0] {S_IDLE, S_LOOK, S_EVICT, S_REQ, S_WAIT, S_RSP} state_e;
  state_e st_q;

  logic [SETS*WAYS-1:0] vld_q;   // valid bits, line s*WAYS+w
  logic [TAG_W-1:0] tag_q [SETS][WAYS];
  ts_t              rts_q [SETS][WAYS];
  ts_t              wts_q [SETS][WAYS];
  blk_t             dat_q [SETS][WAYS];
  logic [15:0]      use_q [SETS][WAYS];
  logic [15:0]      clk_use_q;
  cts_t             cts_q;

  mem_req_t         req_q;
  logic [SW-1:0]    src_q;
  logic [WAY_W-1:0] way_q;
  mem_rsp_t         rsp_q;
  mem_req_t         ev_msg_q;

  logic [IDX_W-1:0] idx;
  logic [TAG_W-1:0] tag;
  assign idx = req_q.baddr[BANK_W +: IDX_W];
  assign tag = req_q.baddr[BADDR_W-1 -: TAG_W];

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

  // Address of the block in the victim way: same set and bank bits.
  baddr_t vict_baddr;
  always_comb begin
    vict_baddr = req_q.baddr;
    vict_baddr[BADDR_W-1 -: TAG_W] = tag_q[idx][vict_way];
  end

  // Lease arithmetic on a memory response.
  logic [CTS_W-1:0] bwts;
  logic [TS_W:0]    brts;
  logic             ovf;
  always_comb begin
    bwts = (cts_q > cts_t'(mem_rsp.wts)) ? cts_q : cts_t'(mem_rsp.wts);
    brts = ({1'b0, mem_rsp.wts} + 1'b1 > {1'b0, mem_rsp.rts}) ?
           {1'b0, mem_rsp.wts} + 1'b1 : {1'b0, mem_rsp.rts};
    ovf  = (bwts > cts_t'(TS_MAX)) || (brts > (TS_W+1)'(TS_MAX));
  end

  logic look, rd_hit, wr_hit;
  assign look   = (st_q == S_LOOK);
  assign rd_hit = look && req_q.op == OP_RD && lease_ok;
  assign wr_hit = look && req_q.op == OP_WR && lease_ok;

  assign up_req_ready  = (st_q == S_IDLE);
  assign up_rsp_valid  = (st_q == S_RSP);
  assign up_rsp        = rsp_q;
  assign up_rsp_dst    = src_q;
  assign mem_req_valid = (st_q == S_EVICT) || (st_q == S_REQ);
  assign mem_req       = (st_q == S_EVICT) ? ev_msg_q : req_q;
  assign mem_req_dst   = MW'(mem_of(mem_req.baddr, N_MEM));
  assign cts           = cts_q;

  logic fill;
  assign fill = (st_q == S_WAIT) && mem_rsp_valid && !ovf;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q      <= S_IDLE;
      cts_q     <= '0;
      clk_use_q <= '0;
      req_q     <= '0;
      src_q     <= '0;
      way_q     <= '0;
      rsp_q     <= '0;
      ev_msg_q  <= '0;
      vld_q     <= '0;
    end else begin
      case (st_q)
        S_IDLE: if (up_req_valid) begin
          req_q <= up_req;
          src_q <= up_req_src;
          st_q  <= S_LOOK;
        end
        S_LOOK: begin
          clk_use_q <= clk_use_q + 1'b1;
          if (rd_hit) begin
            rsp_q <= '{data: dat_q[idx][tm_way], rts: rts_q[idx][tm_way],
                       wts: wts_q[idx][tm_way]};
            st_q  <= S_RSP;
          end else begin
            way_q <= tm ? tm_way : vict_way;
            ev_msg_q <= '{op: OP_EVICT, baddr: vict_baddr, widx: '0, wdata: '0,
                          rts: rts_q[idx][vict_way]};
            if (!tm && !has_free) begin
              // The victim leaves the cache now; tell its memory module.
              vld_q[int'(idx) * WAYS + int'(vict_way)] <= 1'b0;
              st_q <= S_EVICT;
            end else begin
              st_q <= S_REQ;
            end
          end
        end
        S_EVICT: if (mem_req_ready) st_q <= S_REQ;
        S_REQ:   if (mem_req_ready) st_q <= S_WAIT;
        S_WAIT:  if (mem_rsp_valid) begin
          if (ovf) begin
            cts_q <= '0;
            vld_q[int'(idx) * WAYS + int'(way_q)] <= 1'b0;
            rsp_q <= '{data: mem_rsp.data, rts: '0, wts: '0};
          end else begin
            vld_q[int'(idx) * WAYS + int'(way_q)] <= 1'b1;
            cts_q <= bwts;
            rsp_q <= '{data: mem_rsp.data, rts: ts_t'(brts), wts: ts_t'(bwts)};
          end
          st_q <= S_RSP;
        end
        S_RSP: if (up_rsp_ready) st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end

  // Tag, lease, data and LRU arrays. They are not reset (a line is only
  // read once its valid bit is set), so that they can be built as RAMs.
  always_ff @(posedge clk) begin
    if (look && lease_ok) use_q[idx][tm_way] <= clk_use_q;
    if (wr_hit) dat_q[idx][tm_way] <= blk_put(dat_q[idx][tm_way], req_q.widx, req_q.wdata);
    if (fill) begin
      tag_q[idx][way_q] <= tag;
      wts_q[idx][way_q] <= ts_t'(bwts);
      rts_q[idx][way_q] <= ts_t'(brts);
      dat_q[idx][way_q] <= mem_rsp.data;
      use_q[idx][way_q] <= clk_use_q;
    end
  end

  always_comb begin
    ev = '0;
    if (look) begin
      ev.rd_hit    = rd_hit;
      ev.wr_hit    = wr_hit;
      ev.comp_miss = !tm;
      ev.coh_miss  = tm && !lease_ok;
      ev.evict     = !tm && !has_free;
    end
    if (st_q == S_WAIT && mem_rsp_valid) ev.ts_ovf = ovf;
  end

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> st_q == S_WAIT);

endmodule

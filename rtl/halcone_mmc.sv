// halcone_mmc: main memory controller of one HBM stack, with its TSU.
//
// The controller takes one request at a time from the L2-to-memory network.
// A read or a write is sent to the TSU (lookup path) and to the DRAM
// (request path) in the same cycle; the TSU answers with the lease (Mrts,
// Mwts) after its fixed latency, the DRAM with the block (for a write, the
// block after the write). When both have answered, the controller returns
// {block, rts, wts} to the requesting L2 bank. An eviction notice from an L2
// goes to the TSU only and gets no response. Because the TSU (50 cycles) is
// faster than the DRAM (100 cycles), the TSU adds no latency.
//
// The parallel TSU/DRAM access follows the paper. Serving one request at a
// time, and the message formats, are this design's choices.
//
// Interface: net_req_* (valid/ready, request and the index of the sending L2
// bank); net_rsp_* (valid/ready, response and destination L2 index);
// dram_req_* (valid/ready) and dram_rsp_* (valid pulse with the block).
module halcone_mmc
  import halcone_pkg::*;
#(
  parameter int unsigned N_L2        = 32,
  parameter int unsigned N_MEM       = 32,
  parameter int unsigned TSU_SETS    = 512,
  parameter int unsigned TSU_WAYS    = 8,
  parameter int unsigned TSU_LATENCY = 50,
  parameter int unsigned RD_LEASE    = RD_LEASE_DEF,
  parameter int unsigned WR_LEASE    = WR_LEASE_DEF,
  localparam int unsigned SW         = (N_L2 > 1) ? $clog2(N_L2) : 1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      net_req_valid,
  output logic      net_req_ready,
  input  mem_req_t  net_req,
  input  logic [SW-1:0] net_req_src,
  output logic      net_rsp_valid,
  input  logic      net_rsp_ready,
  output mem_rsp_t  net_rsp,
  output logic [SW-1:0] net_rsp_dst,
  output logic      dram_req_valid,
  input  logic      dram_req_ready,
  output dram_req_t dram_req,
  input  logic      dram_rsp_valid,
  input  blk_t      dram_rsp_data,
  output tsu_ev_t   tsu_ev
);

  typedef enum logic [1:0] {M_IDLE, M_WAIT, M_RSP} mstate_e;
  mstate_e st_q;

  mem_req_t      req_q;
  logic [SW-1:0] src_q;
  logic          tsu_sent_q, dram_sent_q, tsu_done_q, dram_done_q;
  ts_t           rts_q, wts_q;
  blk_t          data_q;

  logic tsu_req_valid, tsu_req_ready, tsu_rsp_valid;
  ts_t  tsu_rsp_rts, tsu_rsp_wts;

  halcone_tsu #(
    .SETS(TSU_SETS), .WAYS(TSU_WAYS), .LATENCY(TSU_LATENCY),
    .RD_LEASE(RD_LEASE), .WR_LEASE(WR_LEASE)
  ) u_tsu (
    .clk, .rst_n,
    .req_valid(tsu_req_valid), .req_ready(tsu_req_ready),
    .req_op(req_q.op), .req_baddr(mem_local(req_q.baddr, $clog2(N_MEM))),
    .req_rts(req_q.rts),
    .rsp_valid(tsu_rsp_valid), .rsp_rts(tsu_rsp_rts), .rsp_wts(tsu_rsp_wts),
    .ev(tsu_ev)
  );

  assign net_req_ready  = (st_q == M_IDLE);
  assign tsu_req_valid  = (st_q == M_WAIT) && !tsu_sent_q;
  assign dram_req_valid = (st_q == M_WAIT) && !dram_sent_q;
  assign dram_req       = '{we: (req_q.op == OP_WR), baddr: req_q.baddr,
                            widx: req_q.widx, wdata: req_q.wdata};
  assign net_rsp_valid  = (st_q == M_RSP);
  assign net_rsp        = '{data: data_q, rts: rts_q, wts: wts_q};
  assign net_rsp_dst    = src_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q        <= M_IDLE;
      req_q       <= '0;
      src_q       <= '0;
      tsu_sent_q  <= 1'b0;
      dram_sent_q <= 1'b0;
      tsu_done_q  <= 1'b0;
      dram_done_q <= 1'b0;
      rts_q       <= '0;
      wts_q       <= '0;
      data_q      <= '0;
    end else begin
      case (st_q)
        M_IDLE: if (net_req_valid) begin
          st_q        <= M_WAIT;
          req_q       <= net_req;
          src_q       <= net_req_src;
          tsu_sent_q  <= 1'b0;
          tsu_done_q  <= 1'b0;
          // An eviction notice does not touch the DRAM.
          dram_sent_q <= (net_req.op == OP_EVICT);
          dram_done_q <= (net_req.op == OP_EVICT);
        end
        M_WAIT: begin
          if (tsu_req_valid && tsu_req_ready) tsu_sent_q <= 1'b1;
          if (dram_req_valid && dram_req_ready) dram_sent_q <= 1'b1;
          if (tsu_rsp_valid) begin
            tsu_done_q <= 1'b1;
            rts_q <= tsu_rsp_rts;
            wts_q <= tsu_rsp_wts;
          end
          if (dram_rsp_valid && dram_sent_q && !dram_done_q) begin
            dram_done_q <= 1'b1;
            data_q <= dram_rsp_data;
          end
          if ((tsu_done_q || tsu_rsp_valid) &&
              (dram_done_q || (dram_rsp_valid && dram_sent_q)))
            st_q <= (req_q.op == OP_EVICT) ? M_IDLE : M_RSP;
        end
        M_RSP: if (net_rsp_ready) st_q <= M_IDLE;
        default: st_q <= M_IDLE;
      endcase
    end
  end

endmodule

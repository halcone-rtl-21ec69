// halcone_dram_model: behavioural model of the DRAM layers of one HBM stack.
//
// Not synthesizable and not part of the design: it stands in for the memory
// the controller talks to. One request at a time; a block read, or a word
// write followed by a read of the whole updated block, answers LATENCY
// cycles after acceptance (100 by default, the fixed memory latency assumed
// for the evaluated system). Storage is sparse. A word never written reads
// as its own word address {block address, word index}, so testbenches can
// predict initial contents.
module halcone_dram_model
  import halcone_pkg::*;
#(
  parameter int unsigned LATENCY = 100
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  dram_req_t req,
  output logic      rsp_valid,
  output blk_t      rsp_data
);

  word_t mem [logic [BADDR_W+WIDX_W-1:0]];
  logic  busy;
  int    cnt;
  baddr_t ba;

  function automatic word_t rd_word(baddr_t a, widx_t i);
    if (mem.exists({a, i})) return mem[{a, i}];
    return {a, i};
  endfunction

  assign req_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= 0;
      rsp_valid <= 1'b0;
      ba        <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (req_valid && !busy) begin
        busy <= 1'b1;
        cnt  <= LATENCY - 1;
        ba   <= req.baddr;
        if (req.we) mem[{req.baddr, req.widx}] = req.wdata;
      end else if (busy) begin
        if (cnt <= 1) begin
          busy      <= 1'b0;
          rsp_valid <= 1'b1;
          for (int i = 0; i < WORDS; i++) rsp_data[i*WORD_W +: WORD_W] <= rd_word(ba, widx_t'(i));
        end else cnt <= cnt - 1;
      end
    end
  end

endmodule

// halcone_xbar: one-direction crossbar with a round-robin arbiter per output.
//
// Every input offers a message of type T together with the index of the
// output it wants. Each output grants one of the inputs that want it, in
// round-robin order starting after the input it served last, and passes the
// message through in the same cycle together with the index of the source.
// A message moves when its output is valid and ready; the input then sees
// in_ready high. There is no buffering: the crossbar adds no latency.
//
// It is used for the GPU-internal XBar (L1s to L2 banks and back) and for the
// switch complex between the L2 banks of all GPUs and the memory modules.
// The paper names these networks but gives neither topology nor arbitration;
// the full crossbar and round-robin arbitration are this design's choices.
module halcone_xbar #(
  parameter int unsigned N_IN  = 4,
  parameter int unsigned N_OUT = 4,
  parameter type         T     = logic [7:0],
  localparam int unsigned DW   = (N_OUT > 1) ? $clog2(N_OUT) : 1,
  localparam int unsigned SW   = (N_IN  > 1) ? $clog2(N_IN)  : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid [N_IN],
  output logic          in_ready [N_IN],
  input  logic [DW-1:0] in_dst   [N_IN],
  input  T              in_data  [N_IN],
  output logic          out_valid[N_OUT],
  input  logic          out_ready[N_OUT],
  output logic [SW-1:0] out_src  [N_OUT],
  output T              out_data [N_OUT]
);

  logic [SW-1:0] last_q [N_OUT];   // input served last by each output
  logic [SW-1:0] grant  [N_OUT];
  logic          any    [N_OUT];

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      any[o]   = 1'b0;
      grant[o] = '0;
      for (int k = 1; k <= N_IN; k++) begin
        int unsigned i;
        i = (int'(last_q[o]) + k) % N_IN;
        if (!any[o] && in_valid[i] && int'(in_dst[i]) == o) begin
          any[o]   = 1'b1;
          grant[o] = SW'(i);
        end
      end
      out_valid[o] = any[o];
      out_src[o]   = grant[o];
      out_data[o]  = in_data[grant[o]];
    end
    for (int i = 0; i < N_IN; i++) begin
      in_ready[i] = 1'b0;
      for (int o = 0; o < N_OUT; o++)
        if (any[o] && int'(grant[o]) == i && out_ready[o]) in_ready[i] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < N_OUT; o++) last_q[o] <= SW'(N_IN - 1);
    end else begin
      for (int o = 0; o < N_OUT; o++)
        if (any[o] && out_ready[o]) last_q[o] <= grant[o];
    end
  end

endmodule

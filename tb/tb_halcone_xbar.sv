// tb_halcone_xbar: random test of the round-robin crossbar.
//
// Four inputs send random 16-bit messages to three outputs whose ready
// toggles at random. A reference arbiter in the testbench predicts, for
// every output and cycle, which input must be granted (the first requesting
// input after the one served last); the crossbar's valid, source, data and
// the inputs' ready are compared with it, and every message sent must be
// received exactly once, in order per input.
module tb_halcone_xbar;
  localparam int NI = 4, NO = 3;
  typedef logic [15:0] msg_t;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       in_valid[NI], in_ready[NI];
  logic [1:0] in_dst[NI];
  msg_t       in_data[NI];
  logic       out_valid[NO], out_ready[NO];
  logic [1:0] out_src[NO];
  msg_t       out_data[NO];

  halcone_xbar #(.N_IN(NI), .N_OUT(NO), .T(msg_t)) dut (.*);

  int last[NO];
  int sent[NI], rcvd[NI];
  bit take[NI];

  initial begin
    for (int i = 0; i < NI; i++) begin in_valid[i] = 0; in_dst[i] = 0; in_data[i] = 0; sent[i] = 0; rcvd[i] = 0; end
    for (int o = 0; o < NO; o++) begin out_ready[o] = 0; last[o] = NI - 1; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // new offers on idle inputs; an offer is held until taken
      for (int i = 0; i < NI; i++)
        if (!in_valid[i] && $urandom_range(0, 3) != 0) begin
          in_valid[i] = 1;
          in_dst[i]   = 2'($urandom_range(0, NO - 1));
          in_data[i]  = msg_t'({i[1:0], 14'(sent[i])});
        end
      for (int o = 0; o < NO; o++) out_ready[o] = $urandom_range(0, 3) != 0;
      #1;
      for (int o = 0; o < NO; o++) begin
        int exp_g;
        exp_g = -1;
        for (int k = 1; k <= NI; k++) begin
          int i;
          i = (last[o] + k) % NI;
          if (exp_g < 0 && in_valid[i] && in_dst[i] == o) exp_g = i;
        end
        checks++;
        if (out_valid[o] != (exp_g >= 0) || (exp_g >= 0 && (out_src[o] != exp_g ||
            out_data[o] != in_data[exp_g]))) begin
          failures++;
          $display("FAIL cyc %0d out %0d: valid %0d src %0d exp %0d", cyc, o, out_valid[o], out_src[o], exp_g);
        end
        if (exp_g >= 0 && out_ready[o]) begin
          checks++;
          if (out_data[o][13:0] != 14'(rcvd[exp_g])) begin failures++; $display("FAIL order"); end
          rcvd[exp_g]++;
          last[o] = exp_g;
        end
      end
      for (int i = 0; i < NI; i++) begin
        bit exp_r;
        exp_r = 0;
        for (int o = 0; o < NO; o++) if (out_valid[o] && out_src[o] == i && out_ready[o]) exp_r = 1;
        checks++;
        if (in_ready[i] != exp_r) begin failures++; $display("FAIL ready %0d", i); end
        take[i] = in_valid[i] && in_ready[i];
      end
      @(posedge clk);
      #1;
      for (int i = 0; i < NI; i++) if (take[i]) begin in_valid[i] = 0; sent[i]++; end
    end
    for (int i = 0; i < NI; i++) begin
      checks++;
      if (sent[i] != rcvd[i] || sent[i] < 100) begin failures++; $display("FAIL count %0d %0d %0d", i, sent[i], rcvd[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

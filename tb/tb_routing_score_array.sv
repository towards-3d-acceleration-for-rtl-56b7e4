// tb_routing_score_array: default 16 x 8 array; streams 64 random
// (timestep, feature) steps of token spikes and routing weights and checks
// every expert score of every token after the array latency.
module tb_routing_score_array;
  localparam int NT = 16, NE = 8, K = 64;
  logic clk = 0, rst_n = 0, clear = 0, valid = 0;
  logic [NT-1:0] spikes;
  logic signed [7:0] wr [NE];
  logic signed [19:0] score [NT][NE];
  int checks = 0, failures = 0;
  int wt [K][NE];
  bit sp [K][NT];

  routing_score_array dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    spikes = '0;
    for (int e = 0; e < NE; e++) wr[e] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < K; k++) begin
      for (int e = 0; e < NE; e++) wt[k][e] = $signed(8'($urandom));
      for (int n = 0; n < NT; n++) sp[k][n] = 1'($urandom);
    end
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    for (int k = 0; k < K; k++) begin
      valid = 1;
      for (int e = 0; e < NE; e++) wr[e] = 8'(wt[k][e]);
      for (int n = 0; n < NT; n++) spikes[n] = sp[k][n];
      @(negedge clk);
    end
    valid = 0;
    repeat (NT + NE) @(negedge clk);
    for (int n = 0; n < NT; n++)
      for (int e = 0; e < NE; e++) begin
        int expv;
        expv = 0;
        for (int k = 0; k < K; k++) if (sp[k][n]) expv += wt[k][e];
        checks++;
        if (score[n][e] !== 20'(expv)) begin
          failures++;
          $display("token %0d expert %0d: %0d vs %0d", n, e, score[n][e], expv);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_se_pe_array: streams random signed weights and spikes through a 6 x 10
// array, checks every synaptic integration against a direct sum after
// exactly ROWS+COLS-1 cycles after the edge that takes the last step, and that the corner PE is not yet complete one
// cycle earlier. Repeats after a clear.
module tb_se_pe_array;
  localparam int R = 6, C = 10, K = 13;
  logic clk = 0, rst_n = 0, clear = 0, valid = 0;
  logic signed [7:0]  w_in [R];
  logic [C-1:0]       s_in;
  logic signed [15:0] si [R][C];
  int checks = 0, failures = 0;
  int wt [K][R];
  bit sp [K][C];

  se_pe_array #(.ROWS(R), .COLS(C)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int pass);
    int expv;
    for (int k = 0; k < K; k++) begin
      for (int r = 0; r < R; r++) wt[k][r] = int'($signed(8'($urandom)));
      for (int c = 0; c < C; c++) sp[k][c] = (k == K-1) ? 1'b1 : 1'($urandom);
      if (k == K-1) for (int r = 0; r < R; r++) if (wt[k][r] == 0) wt[k][r] = 5;
    end
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    for (int k = 0; k < K; k++) begin
      valid = 1;
      for (int r = 0; r < R; r++) w_in[r] = 8'(wt[k][r]);
      for (int c = 0; c < C; c++) s_in[c] = sp[k][c];
      @(negedge clk);
    end
    // a step with valid low must be ignored
    valid = 0; s_in = '1;
    for (int r = 0; r < R; r++) w_in[r] = 8'sd7;
    repeat (R + C - 2) @(negedge clk);
    expv = 0;
    for (int k = 0; k < K; k++) if (sp[k][C-1]) expv += wt[k][R-1];
    checks++;
    if (si[R-1][C-1] == 16'(expv)) begin
      failures++;
      $display("pass %0d: corner PE complete too early", pass);
    end
    @(negedge clk);
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        expv = 0;
        for (int k = 0; k < K; k++) if (sp[k][c]) expv += wt[k][r];
        checks++;
        if (si[r][c] !== 16'(expv)) begin
          failures++;
          $display("pass %0d PE(%0d,%0d): %0d vs %0d", pass, r, c, si[r][c], expv);
        end
      end
  endtask

  initial begin
    for (int r = 0; r < R; r++) w_in[r] = '0;
    s_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rpe_array: default 16 x 16 reconfigurable array. Mode 0 with random Q
// and K tiles: every attention register must equal the count of common
// spikes. Mode 1 with a random V tile: every row output must equal
// sum_nk A[nq][nk] V[nk][f], arrive in feature order and leave row nq
// exactly nq + COLS + 1 cycles after feature f was given.
module tb_rpe_array;
  localparam int P = 16;
  logic clk = 0, rst_n = 0, mode = 0, clear_a = 0, valid = 0;
  logic [P-1:0] q_in = '0, kv_in = '0;
  logic [15:0] x_out [P];
  logic [P-1:0] x_valid;
  logic [7:0] a [P][P];
  int checks = 0, failures = 0;
  bit q [P][P], k [P][P], v [P][P];
  int amap [P][P];
  int got [P];
  int cyc;

  rpe_array dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // collect mode-1 outputs
  always @(negedge clk) if (rst_n && mode) begin
    for (int r = 0; r < P; r++) if (x_valid[r]) begin
      int expv;
      expv = 0;
      for (int c = 0; c < P; c++) if (v[c][got[r]]) expv += amap[r][c];
      checks += 2;
      if (int'(x_out[r]) != expv) begin
        failures++;
        $display("row %0d f %0d: %0d vs %0d", r, got[r], x_out[r], expv);
      end
      if (cyc != got[r] + r + P + 1) begin
        failures++;
        $display("row %0d f %0d at cycle %0d", r, got[r], cyc);
      end
      got[r]++;
    end
    cyc++;
  end

  initial begin
    for (int i = 0; i < P; i++) begin
      got[i] = 0;
      for (int j = 0; j < P; j++) begin
        q[i][j] = 1'($urandom); k[i][j] = 1'($urandom); v[i][j] = 1'($urandom);
      end
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // pollute the attention registers, then clear them
    mode = 0; valid = 1; q_in = '1; kv_in = '1;
    repeat (3) @(negedge clk);
    valid = 0;
    repeat (2 * P + 2) @(negedge clk);
    clear_a = 1;
    @(negedge clk);
    clear_a = 0;
    for (int f = 0; f < P; f++) begin
      valid = 1;
      for (int i = 0; i < P; i++) begin
        q_in[i] = q[i][f];
        kv_in[i] = k[i][f];
      end
      @(negedge clk);
    end
    valid = 0; q_in = '1; kv_in = '1;
    repeat (2 * P + 2) @(negedge clk);
    for (int r = 0; r < P; r++)
      for (int c = 0; c < P; c++) begin
        amap[r][c] = 0;
        for (int f = 0; f < P; f++) amap[r][c] += int'(q[r][f] & k[c][f]);
        checks++;
        if (int'(a[r][c]) != amap[r][c]) begin
          failures++;
          $display("A(%0d,%0d): %0d vs %0d", r, c, a[r][c], amap[r][c]);
        end
      end
    mode = 1;
    cyc = 0;
    for (int f = 0; f < P; f++) begin
      valid = 1;
      for (int i = 0; i < P; i++) kv_in[i] = v[i][f];
      @(negedge clk);
    end
    valid = 0;
    repeat (3 * P) @(negedge clk);
    for (int r = 0; r < P; r++) begin
      checks++;
      if (got[r] != P) begin
        failures++;
        $display("row %0d gave %0d outputs", r, got[r]);
      end
    end
    // the map is kept through mode 1
    checks++;
    if (int'(a[3][5]) != amap[3][5]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

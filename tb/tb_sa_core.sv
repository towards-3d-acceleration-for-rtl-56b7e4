// tb_sa_core: one attention head for 32 tokens over 2 timesteps on a
// default 16 x 16 attention core. Loads random Q, K, V spikes into the
// local buffers, runs the core and checks every output spike against a
// reference: A = Q K^T per timestep, X = A V, LIF membrane carried from
// timestep to timestep. Also checks the run time against the schedule.
module tb_sa_core;
  import snn_pkg::*;
  import tb_ref_pkg::*;
  localparam int P = 16, N = 32, TS = 2, TPW = 8, KB = 1536, OB = 1536;
  localparam int VTH = 60, VLK = 2;
  logic clk = 0, rst_n = 0;
  logic [11:0] n_tok = N;
  logic [3:0] tsteps = TS;
  logic signed [15:0] vth = VTH, vleak = VLK;
  logic start = 0, busy, done;
  logic a_en = 0, b_en = 0, b_we = 0;
  logic [11:0] a_addr = '0, b_addr = '0;
  word_t a_wdata = '0, b_wdata = '0, b_rdata;
  int checks = 0, failures = 0;
  bit q [TS][N][P], k [TS][N][P], v [TS][N][P];
  bit eo [TS][N][P];

  sa_core dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t pack(input int t, input int w, input int which);
    word_t d;
    d = '0;
    for (int j = 0; j < TPW; j++)
      for (int f = 0; f < P; f++)
        d[j*P + f] = (which == 0) ? q[t][w*TPW+j][f] : (which == 1) ? k[t][w*TPW+j][f]
                                                                  : v[t][w*TPW+j][f];
    return d;
  endfunction

  initial begin
    int cycles, expc;
    for (int t = 0; t < TS; t++)
      for (int n = 0; n < N; n++)
        for (int f = 0; f < P; f++) begin
          q[t][n][f] = ($urandom_range(9) < 4);
          k[t][n][f] = ($urandom_range(9) < 4);
          v[t][n][f] = ($urandom_range(9) < 4);
        end
    // reference
    for (int n = 0; n < N; n++)
      for (int f = 0; f < P; f++) begin
        int vm;
        vm = 0;
        for (int t = 0; t < TS; t++) begin
          int x;
          x = 0;
          for (int m = 0; m < N; m++) if (v[t][m][f]) begin
            int aa;
            aa = 0;
            for (int g = 0; g < P; g++) aa += int'(q[t][n][g] & k[t][m][g]);
            x += aa;
          end
          eo[t][n][f] = lif_step(vm, x, VTH, VLK);
        end
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < TS; t++)
      for (int w = 0; w < N / TPW; w++) begin
        @(negedge clk);
        a_en = 1; a_addr = 12'(t * (N / TPW) + w); a_wdata = pack(t, w, 0);
        b_en = 1; b_we = 1; b_addr = 12'(t * (N / TPW) + w); b_wdata = pack(t, w, 2);
        @(negedge clk);
        b_en = 0;
        a_addr = 12'(KB + t * (N / TPW) + w); a_wdata = pack(t, w, 1);
      end
    @(negedge clk);
    a_en = 0; start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
    // per (t, query tile): 3 + tiles * 108 + 96 + 3 cycles, plus one
    expc = TS * (N / P) * (3 + (N / P) * 108 + 99) + 1;
    checks++;
    if (cycles != expc) begin
      failures++;
      $display("run took %0d cycles, expected %0d", cycles, expc);
    end
    for (int t = 0; t < TS; t++)
      for (int w = 0; w < N / TPW; w++) begin
        @(negedge clk);
        b_en = 1; b_we = 0; b_addr = 12'(OB + t * (N / TPW) + w);
        @(negedge clk);
        b_en = 0;
        for (int j = 0; j < TPW; j++)
          for (int f = 0; f < P; f++) begin
            checks++;
            if (b_rdata[j*P + f] !== eo[t][w*TPW+j][f]) begin
              failures++;
              if (failures < 10) $display("t %0d token %0d f %0d: %b vs %b", t, w*TPW+j, f,
                                          b_rdata[j*P + f], eo[t][w*TPW+j][f]);
            end
          end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

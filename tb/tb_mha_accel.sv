// tb_mha_accel: the attention accelerator at its default sizes (four
// 16 x 16 attention cores, 8K-word Act GLB) running 8 heads of 16 features
// (two rounds of four cores) for 32 tokens and 2 timesteps. Random Q, K, V
// spikes are written to the Act GLB, the layer is run, and every output
// spike of the concatenated heads is checked against a reference (per head
// and timestep A = Q K^T, X = A V, LIF carried over timesteps). Also checks
// the round and dispatched-word counters.
module tb_mha_accel;
  import snn_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 32, TS = 2, H = 8, D = 128, P = 16;
  localparam int QB = 0, KB = 512, VB = 1024, OUTB = 2048;
  localparam int VTH = 60, VLK = 2;
  logic clk = 0, rst_n = 0;
  logic host_en = 0, host_we = 0;
  logic [12:0] host_addr = '0;
  word_t host_wdata = '0, host_rdata;
  logic [11:0] n_tok = N;
  logic [3:0] tsteps = TS;
  logic [3:0] num_heads = H;
  logic [12:0] q_base = QB, k_base = KB, v_base = VB, out_base = OUTB;
  logic signed [15:0] vth = VTH, vleak = VLK;
  logic start = 0, busy, done;
  logic [15:0] n_rounds, n_dispatched;
  int checks = 0, failures = 0;
  bit q [TS][N][D], k [TS][N][D], v [TS][N][D];
  bit eo [TS][N][D];

  mha_accel dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hw(input int addr, input word_t d);
    @(negedge clk);
    host_en = 1; host_we = 1; host_addr = 13'(addr); host_wdata = d;
    @(negedge clk);
    host_en = 0;
  endtask

  initial begin
    int nspk;
    for (int t = 0; t < TS; t++)
      for (int n = 0; n < N; n++)
        for (int f = 0; f < D; f++) begin
          q[t][n][f] = ($urandom_range(9) < 4);
          k[t][n][f] = ($urandom_range(9) < 4);
          v[t][n][f] = ($urandom_range(9) < 4);
        end
    nspk = 0;
    for (int h = 0; h < H; h++)
      for (int n = 0; n < N; n++)
        for (int f = h * P; f < h * P + P; f++) begin
          int vm;
          vm = 0;
          for (int t = 0; t < TS; t++) begin
            int x;
            x = 0;
            for (int m = 0; m < N; m++) if (v[t][m][f]) begin
              for (int g = h * P; g < h * P + P; g++) x += int'(q[t][n][g] & k[t][m][g]);
            end
            eo[t][n][f] = lif_step(vm, x, VTH, VLK);
            nspk += int'(eo[t][n][f]);
          end
        end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < TS; t++)
      for (int n = 0; n < N; n++) begin
        word_t dq, dk, dv;
        for (int f = 0; f < D; f++) begin
          dq[f] = q[t][n][f]; dk[f] = k[t][n][f]; dv[f] = v[t][n][f];
        end
        hw(QB + t * N + n, dq);
        hw(KB + t * N + n, dk);
        hw(VB + t * N + n, dv);
      end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int t = 0; t < TS; t++)
      for (int n = 0; n < N; n++) begin
        @(negedge clk);
        host_en = 1; host_we = 0; host_addr = 13'(OUTB + t * N + n);
        @(negedge clk);
        host_en = 0;
        for (int f = 0; f < D; f++) begin
          checks++;
          if (host_rdata[f] !== eo[t][n][f]) begin
            failures++;
            if (failures < 10) $display("t %0d token %0d f %0d: %b vs %b", t, n, f,
                                        host_rdata[f], eo[t][n][f]);
          end
        end
      end
    checks += 3;
    if (n_rounds != 2) failures++;
    if (n_dispatched != 16'(2 * 3 * TS * N / 8)) failures++;
    if (nspk == 0 || nspk == TS * N * D) failures++;
    $display("output spikes %0d of %0d", nspk, TS * N * D);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

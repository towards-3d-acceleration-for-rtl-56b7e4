// tb_moe_accel: the MoE accelerator at its default sizes (four 16 x 128
// expert cores, 16 x 8 routing array, 8K-word GLBs) running a 32-token,
// 4-timestep tile with 16 input features, 32 output neurons and six
// experts, top-1. A reference computes the routing scores, the selected
// expert per token and the LIF outputs; every output spike in the Act GLB
// is checked. The tile is run twice: the second run must reuse the weights
// still held by cores 2 and 3. Checks the number of rounds, preloads and
// preload skips, and the per-expert token counts.
module tb_moe_accel;
  import snn_pkg::*;
  import tb_ref_pkg::*;
  localparam int TS = 4, TOK = 32, DIN = 16, DOUT = 32, NE = 6;
  localparam int WRB = 4096, STRIDE = 1024, OUTB = 256;
  localparam int VTH = 30, VLK = 2;
  logic clk = 0, rst_n = 0;
  logic host_en = 0, host_we = 0;
  logic [1:0] host_sel = '0;
  logic [12:0] host_addr = '0;
  word_t host_wdata = '0, host_rdata;
  logic [3:0] num_experts = 4'(NE);
  logic [11:0] d_in = DIN, d_out = DOUT;
  logic [12:0] in_base = '0, out_base = OUTB;
  logic signed [15:0] vth = VTH, vleak = VLK;
  logic start = 0, busy, done;
  logic [15:0] n_rounds, n_preloads, n_preload_skips;
  logic [15:0] n_routed [8];
  int checks = 0, failures = 0;
  bit sp [TOK][TS][DIN];
  int wr [TS][DIN][8];
  int w [NE][DIN][DOUT];
  int best [TOK];
  int cnt_e [8];

  moe_accel dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hw(input int sel, input int addr, input word_t d);
    @(negedge clk);
    host_en = 1; host_we = 1; host_sel = 2'(sel); host_addr = 13'(addr); host_wdata = d;
    @(negedge clk);
    host_en = 0;
  endtask

  task automatic run_and_check(input int pass);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int o = 0; o < DOUT; o++) begin
      @(negedge clk);
      host_en = 1; host_we = 0; host_sel = 2'd0; host_addr = 13'(OUTB + o);
      @(negedge clk);
      host_en = 0;
      for (int j = 0; j < TOK; j++) begin
        int v;
        v = 0;
        for (int t = 0; t < TS; t++) begin
          int x;
          bit e;
          x = 0;
          for (int k = 0; k < DIN; k++) if (sp[j][t][k]) x += w[best[j]][k][o];
          e = lif_step(v, x, VTH, VLK);
          checks++;
          if (host_rdata[j*TS+t] !== e) begin
            failures++;
            if (failures < 10) $display("pass %0d neuron %0d token %0d t %0d", pass, o, j, t);
          end
        end
      end
    end
  endtask

  initial begin
    for (int j = 0; j < TOK; j++)
      for (int t = 0; t < TS; t++)
        for (int k = 0; k < DIN; k++) sp[j][t][k] = ($urandom_range(9) < 4);
    for (int t = 0; t < TS; t++)
      for (int k = 0; k < DIN; k++)
        for (int e = 0; e < 8; e++) wr[t][k][e] = $signed($urandom_range(60)) - 30;
    for (int e = 0; e < NE; e++)
      for (int k = 0; k < DIN; k++)
        for (int o = 0; o < DOUT; o++) w[e][k][o] = $signed($urandom_range(60)) - 20;
    for (int e = 0; e < 8; e++) cnt_e[e] = 0;
    for (int j = 0; j < TOK; j++) begin
      int sc [8];
      for (int e = 0; e < 8; e++) begin
        sc[e] = 0;
        for (int t = 0; t < TS; t++)
          for (int k = 0; k < DIN; k++) if (sp[j][t][k]) sc[e] += wr[t][k][e];
      end
      best[j] = 0;
      for (int e = 1; e < NE; e++) if (sc[e] > sc[best[j]]) best[j] = e;
      cnt_e[best[j]]++;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // activation words
    for (int k = 0; k < DIN; k++) begin
      word_t d;
      d = '0;
      for (int j = 0; j < TOK; j++)
        for (int t = 0; t < TS; t++) d[j*TS+t] = sp[j][t][k];
      hw(0, k, d);
    end
    // routing weights in GLB A
    for (int t = 0; t < TS; t++)
      for (int k = 0; k < DIN; k++) begin
        word_t d;
        d = '0;
        for (int e = 0; e < 8; e++) d[e*8 +: 8] = 8'(wr[t][k][e]);
        hw(1, WRB + t * DIN + k, d);
      end
    // expert weights
    for (int e = 0; e < NE; e++)
      for (int oc = 0; oc < DOUT / 16; oc++)
        for (int k = 0; k < DIN; k++) begin
          word_t d;
          d = '0;
          for (int r = 0; r < 16; r++) d[r*8 +: 8] = 8'(w[e][k][oc*16 + r]);
          hw((e % 4 < 2) ? 1 : 2, ((e / 4) * 2 + e % 2) * STRIDE + oc * DIN + k, d);
        end
    run_and_check(0);
    checks += 3;
    if (n_rounds != 2) failures++;
    if (n_preloads != 6) failures++;
    if (n_preload_skips != 0) failures++;
    for (int e = 0; e < 8; e++) begin
      checks++;
      if (int'(n_routed[e]) != cnt_e[e]) begin
        failures++;
        $display("expert %0d routed %0d vs %0d", e, n_routed[e], cnt_e[e]);
      end
    end
    run_and_check(1);
    checks += 3;
    if (n_rounds != 4) failures++;
    if (n_preloads != 10) failures++;
    if (n_preload_skips != 2) begin
      failures++;
      $display("preload skips %0d", n_preload_skips);
    end
    $display("experts per token: %0d %0d %0d %0d %0d %0d", cnt_e[0], cnt_e[1], cnt_e[2],
             cnt_e[3], cnt_e[4], cnt_e[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_spiking_transformer_top: end-to-end run of the whole design at its
// default sizes. Attention layer: 64 tokens, 4 timesteps, 8 heads of 16
// features (128 features), i.e. two rounds on the four attention cores.
// MoE layer: the attention output spikes are copied by the host into the
// MoE Act GLB as the input of a 128 -> 128 spiking MoE layer with six
// experts, top-1, processed as two 32-token tiles. Every output spike of
// both layers is checked against a reference. The test also counts the
// mechanisms of the design and fails if one never happened: multi-round
// attention dispatch, multi-round expert processing, expert weight
// preloads, preload skips (weight reuse across tiles), tokens routed to
// several different experts, and output spikes.
module tb_spiking_transformer_top;
  import snn_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 64, TS = 4, H = 8, D = 128, P = 16;
  localparam int QB = 0, KB = 256, VB = 512, AOB = 1024;
  localparam int NE = 6, DOUT = 128, WRB = 4096, STRIDE = 1024, MOB = 2048;
  localparam int VTH = 60, VLK = 2, MVTH = 40, MVLK = 2;
  logic clk = 0, rst_n = 0;
  // MoE side
  logic moe_host_en = 0, moe_host_we = 0;
  logic [1:0] moe_host_sel = '0;
  logic [12:0] moe_host_addr = '0;
  word_t moe_host_wdata = '0, moe_host_rdata;
  logic [12:0] moe_in_base = '0, moe_out_base = '0;
  logic moe_start = 0, moe_busy, moe_done;
  logic [15:0] moe_n_rounds, moe_n_preloads, moe_n_preload_skips;
  logic [15:0] moe_n_routed [8];
  // MHA side
  logic mha_host_en = 0, mha_host_we = 0;
  logic [12:0] mha_host_addr = '0;
  word_t mha_host_wdata = '0, mha_host_rdata;
  logic mha_start = 0, mha_busy, mha_done;
  logic [15:0] mha_n_rounds, mha_n_dispatched;
  int checks = 0, failures = 0;

  bit q [TS][N][D], k [TS][N][D], v [TS][N][D];
  bit ao [TS][N][D];                 // attention output (reference)
  int wr [TS][D][8];
  int w [NE][D][DOUT];
  int best [N];
  int cnt_e [8];

  spiking_transformer_top dut (
    .clk, .rst_n,
    .moe_host_en, .moe_host_we, .moe_host_sel, .moe_host_addr, .moe_host_wdata,
    .moe_host_rdata, .moe_num_experts(4'(NE)), .moe_d_in(12'(D)), .moe_d_out(12'(DOUT)),
    .moe_in_base, .moe_out_base, .moe_vth(16'(MVTH)), .moe_vleak(16'(MVLK)),
    .moe_start, .moe_busy, .moe_done, .moe_n_rounds, .moe_n_preloads,
    .moe_n_preload_skips, .moe_n_routed,
    .mha_host_en, .mha_host_we, .mha_host_addr, .mha_host_wdata, .mha_host_rdata,
    .mha_n_tok(12'(N)), .mha_tsteps(4'(TS)), .mha_num_heads(4'(H)),
    .mha_q_base(13'(QB)), .mha_k_base(13'(KB)), .mha_v_base(13'(VB)),
    .mha_out_base(13'(AOB)), .mha_vth(16'(VTH)), .mha_vleak(16'(VLK)),
    .mha_start, .mha_busy, .mha_done, .mha_n_rounds, .mha_n_dispatched);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic mha_wr(input int addr, input word_t d);
    @(negedge clk);
    mha_host_en = 1; mha_host_we = 1; mha_host_addr = 13'(addr); mha_host_wdata = d;
    @(negedge clk);
    mha_host_en = 0;
  endtask

  task automatic moe_wr(input int sel, input int addr, input word_t d);
    @(negedge clk);
    moe_host_en = 1; moe_host_we = 1; moe_host_sel = 2'(sel);
    moe_host_addr = 13'(addr); moe_host_wdata = d;
    @(negedge clk);
    moe_host_en = 0;
  endtask

  initial begin
    int nspk_a, nspk_m, ncyc_a, ncyc_m, nexp_used;
    word_t aw [TS][N];
    // ---------------- attention reference ----------------
    for (int t = 0; t < TS; t++)
      for (int n = 0; n < N; n++)
        for (int f = 0; f < D; f++) begin
          q[t][n][f] = ($urandom_range(9) < 3);
          k[t][n][f] = ($urandom_range(9) < 3);
          v[t][n][f] = ($urandom_range(9) < 3);
        end
    nspk_a = 0;
    for (int h = 0; h < H; h++)
      for (int n = 0; n < N; n++)
        for (int f = h * P; f < h * P + P; f++) begin
          int vm;
          vm = 0;
          for (int t = 0; t < TS; t++) begin
            int x;
            x = 0;
            for (int m = 0; m < N; m++) if (v[t][m][f])
              for (int g = h * P; g < h * P + P; g++) x += int'(q[t][n][g] & k[t][m][g]);
            ao[t][n][f] = lif_step(vm, x, VTH, VLK);
            nspk_a += int'(ao[t][n][f]);
          end
        end
    // ---------------- MoE reference data ----------------
    for (int t = 0; t < TS; t++)
      for (int kk = 0; kk < D; kk++)
        for (int e = 0; e < 8; e++) wr[t][kk][e] = $signed($urandom_range(60)) - 30;
    for (int e = 0; e < NE; e++)
      for (int kk = 0; kk < D; kk++)
        for (int o = 0; o < DOUT; o++) w[e][kk][o] = $signed($urandom_range(40)) - 18;
    for (int e = 0; e < 8; e++) cnt_e[e] = 0;
    for (int n = 0; n < N; n++) begin
      int sc [8];
      for (int e = 0; e < 8; e++) begin
        sc[e] = 0;
        for (int t = 0; t < TS; t++)
          for (int kk = 0; kk < D; kk++) if (ao[t][n][kk]) sc[e] += wr[t][kk][e];
      end
      best[n] = 0;
      for (int e = 1; e < NE; e++) if (sc[e] > sc[best[n]]) best[n] = e;
      cnt_e[best[n]]++;
    end

    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---------------- attention layer ----------------
    for (int t = 0; t < TS; t++)
      for (int n = 0; n < N; n++) begin
        word_t dq, dk, dv;
        for (int f = 0; f < D; f++) begin
          dq[f] = q[t][n][f]; dk[f] = k[t][n][f]; dv[f] = v[t][n][f];
        end
        mha_wr(QB + t * N + n, dq);
        mha_wr(KB + t * N + n, dk);
        mha_wr(VB + t * N + n, dv);
      end
    @(negedge clk); mha_start = 1;
    @(negedge clk); mha_start = 0;
    ncyc_a = 1;
    while (!mha_done) begin
      @(negedge clk);
      ncyc_a++;
    end
    for (int t = 0; t < TS; t++)
      for (int n = 0; n < N; n++) begin
        @(negedge clk);
        mha_host_en = 1; mha_host_we = 0; mha_host_addr = 13'(AOB + t * N + n);
        @(negedge clk);
        mha_host_en = 0;
        aw[t][n] = mha_host_rdata;
        for (int f = 0; f < D; f++) begin
          checks++;
          if (mha_host_rdata[f] !== ao[t][n][f]) begin
            failures++;
            if (failures < 10) $display("attention t %0d token %0d f %0d", t, n, f);
          end
        end
      end

    // ---------------- MoE layer ----------------
    // host re-layout: attention word (t, token) -> MoE word (tile, feature)
    for (int tile = 0; tile < N / 32; tile++)
      for (int kk = 0; kk < D; kk++) begin
        word_t d;
        d = '0;
        for (int j = 0; j < 32; j++)
          for (int t = 0; t < TS; t++) d[j*TS+t] = aw[t][tile*32 + j][kk];
        moe_wr(0, tile * D + kk, d);
      end
    for (int t = 0; t < TS; t++)
      for (int kk = 0; kk < D; kk++) begin
        word_t d;
        d = '0;
        for (int e = 0; e < 8; e++) d[e*8 +: 8] = 8'(wr[t][kk][e]);
        moe_wr(1, WRB + t * D + kk, d);
      end
    for (int e = 0; e < NE; e++)
      for (int oc = 0; oc < DOUT / 16; oc++)
        for (int kk = 0; kk < D; kk++) begin
          word_t d;
          d = '0;
          for (int r = 0; r < 16; r++) d[r*8 +: 8] = 8'(w[e][kk][oc*16 + r]);
          moe_wr((e % 4 < 2) ? 1 : 2, ((e / 4) * 2 + e % 2) * STRIDE + oc * D + kk, d);
        end
    ncyc_m = 0;
    for (int tile = 0; tile < N / 32; tile++) begin
      @(negedge clk);
      moe_in_base = 13'(tile * D); moe_out_base = 13'(MOB + tile * DOUT); moe_start = 1;
      @(negedge clk); moe_start = 0;
      while (!moe_done) begin
        @(negedge clk);
        ncyc_m++;
      end
    end
    nspk_m = 0;
    for (int tile = 0; tile < N / 32; tile++)
      for (int o = 0; o < DOUT; o++) begin
        @(negedge clk);
        moe_host_en = 1; moe_host_we = 0; moe_host_sel = 2'd0;
        moe_host_addr = 13'(MOB + tile * DOUT + o);
        @(negedge clk);
        moe_host_en = 0;
        for (int j = 0; j < 32; j++) begin
          int vm, n;
          n = tile * 32 + j;
          vm = 0;
          for (int t = 0; t < TS; t++) begin
            int x;
            bit e;
            x = 0;
            for (int kk = 0; kk < D; kk++) if (ao[t][n][kk]) x += w[best[n]][kk][o];
            e = lif_step(vm, x, MVTH, MVLK);
            nspk_m += int'(e);
            checks++;
            if (moe_host_rdata[j*TS+t] !== e) begin
              failures++;
              if (failures < 10) $display("moe tile %0d neuron %0d token %0d t %0d", tile, o, j, t);
            end
          end
        end
      end

    // ---------------- mechanism coverage ----------------
    nexp_used = 0;
    for (int e = 0; e < 8; e++) begin
      checks++;
      if (int'(moe_n_routed[e]) != cnt_e[e]) failures++;
      if (cnt_e[e] > 0) nexp_used++;
    end
    $display("attention: %0d cycles, %0d rounds, %0d words dispatched, %0d spikes",
             ncyc_a, mha_n_rounds, mha_n_dispatched, nspk_a);
    $display("moe: %0d cycles, %0d rounds, %0d preloads, %0d preload skips, %0d experts used, %0d spikes",
             ncyc_m, moe_n_rounds, moe_n_preloads, moe_n_preload_skips, nexp_used, nspk_m);
    checks += 7;
    if (mha_n_rounds < 2)        begin failures++; $display("no multi-round attention"); end
    if (moe_n_rounds < 2)        begin failures++; $display("no multi-round MoE"); end
    if (moe_n_preloads == 0)     begin failures++; $display("no preload"); end
    if (moe_n_preload_skips == 0) begin failures++; $display("no preload skip"); end
    if (nexp_used < 2)           begin failures++; $display("routing used one expert"); end
    if (nspk_a == 0)             begin failures++; $display("no attention spikes"); end
    if (nspk_m == 0)             begin failures++; $display("no MoE spikes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

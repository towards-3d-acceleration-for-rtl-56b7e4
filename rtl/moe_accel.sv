// moe_accel: spiking Mixture-of-Experts accelerator. Four modularized spiking
// expert (SE) cores, two shareable expert-weight global buffers (W GLB A
// serves cores 0 and 1, W GLB B cores 2 and 3), a spiking activation GLB, the
// expert routing score array and the spiking token router. One start
// processes one tile of 32 tokens x T timesteps through a spiking MoE layer:
//   1 route   : for both 16-token halves, stream the d_in x T (feature,
//               timestep) pairs of activation spikes and routing weights Wr
//               through the score array, then let the router pick top-K;
//   for every round of up to four experts (expert e runs on core e mod 4 in
//   round e / 4):
//   2 dispatch: read each input feature word from the Act GLB once and write
//               the tokens packed per expert into each core's activation LB;
//   3 preload : copy the expert weights W[e] from its weight GLB into the
//               core's weight LB, skipped when that core already holds W[e];
//   4 compute : all active cores run in parallel;
//   5 merge   : read output neuron o of every core, put every token's spikes
//               back at its columns and write the word to the Act GLB.
// Memory map (own choice). Act GLB: input feature k of the tile at
// in_base + k, output neuron o at out_base + o (bit j*T+t = token j, step t).
// Weight GLBs: expert e at slot ((e/4)*2 + e%2) * EXP_STRIDE of GLB A when
// e%4 < 2, else of GLB B, in the weight-LB layout of se_core. Wr[t][k][e]
// at WR_BASE + t*d_in + k of GLB A, bits [8e +: 8].
// Host access to the three GLBs (host_sel 0: Act, 1: W A, 2: W B) is only
// allowed while busy is low. Counters report how often each mechanism ran.
module moe_accel
  import snn_pkg::*;
#(
  parameter int GLB_DEPTH  = 8192,
  parameter int LB_DEPTH   = 3072,
  parameter int ROWS       = 16,
  parameter int COLS       = 128,
  parameter int TSTEPS     = T_DEF,
  parameter int EXPERTS    = 8,
  parameter int TOPK       = 1,
  parameter int WR_BASE    = 4096,
  parameter int EXP_STRIDE = 1024,
  localparam int GAW = $clog2(GLB_DEPTH),
  localparam int LAW = $clog2(LB_DEPTH),
  localparam int EW  = $clog2(EXPERTS+1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // host access to the global buffers
  input  logic                   host_en,
  input  logic                   host_we,
  input  logic [1:0]             host_sel,
  input  logic [GAW-1:0]         host_addr,
  input  word_t                  host_wdata,
  output word_t                  host_rdata,
  // layer configuration
  input  logic [EW-1:0]          num_experts,
  input  logic [LAW-1:0]         d_in,
  input  logic [LAW-1:0]         d_out,
  input  logic [GAW-1:0]         in_base,
  input  logic [GAW-1:0]         out_base,
  input  logic signed [SI_W-1:0] vth,
  input  logic signed [SI_W-1:0] vleak,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  // activity counters
  output logic [15:0]            n_rounds,
  output logic [15:0]            n_preloads,
  output logic [15:0]            n_preload_skips,
  output logic [15:0]            n_routed [EXPERTS]
);
  localparam int CORES  = NUM_CORES;
  localparam int TILE   = COLS / TSTEPS;     // tokens per tile (32)
  localparam int SC_TOK = 16;
  localparam int RLAT   = SC_TOK + EXPERTS + 2;
  localparam int RW     = $clog2(EXPERTS/CORES+1);
  localparam int ACT_OUT_BASE = 1024;

  typedef enum logic [3:0] {S_IDLE, S_RCLR, S_RSTREAM, S_RDRAIN, S_RSCORE,
                            S_DISP, S_PRE, S_COMP, S_MERGE, S_NEXT} state_t;
  state_t state;

  assign busy = (state != S_IDLE);

  // ---------------- global buffers ----------------
  logic           g_en [3];
  logic           g_we [3];
  logic [GAW-1:0] g_addr [3];
  word_t          g_wdata [3];
  word_t          g_rdata [3];

  for (genvar i = 0; i < 3; i++) begin : g_glb
    sram_sp #(.DEPTH(GLB_DEPTH), .WIDTH(WORD_W)) u_glb (
      .clk(clk), .en(g_en[i]), .we(g_we[i]), .addr(g_addr[i]),
      .wdata(g_wdata[i]), .wmask('1), .rdata(g_rdata[i]));
  end

  logic [1:0] host_sel_d;
  always_ff @(posedge clk) host_sel_d <= host_sel;
  assign host_rdata = g_rdata[host_sel_d];

  // ---------------- sequencing state ----------------
  logic [LAW-1:0] k, k_d;
  logic [$clog2(TSTEPS)-1:0] ts, ts_d;
  logic           half;
  logic           rd_d;
  logic [7:0]     dcnt;
  logic [RW-1:0]  round;
  logic           pass;              // preload pass: cores {0,2} then {1,3}
  logic [LAW-1:0] pcnt, pcnt_d;
  logic [LAW-1:0] exp_words;
  logic [EW-1:0]  loaded_id [CORES];
  logic           loaded_ok [CORES];
  logic           core_act  [CORES];   // core has an expert this round
  logic           need_pre  [CORES];

  assign exp_words = d_in * (d_out / LAW'(ROWS));

  always_comb begin
    for (int c = 0; c < CORES; c++) begin
      core_act[c] = (int'(round) * CORES + c) < int'(num_experts);
      need_pre[c] = core_act[c] &&
                    !(loaded_ok[c] && (int'(loaded_id[c]) == int'(round) * CORES + c));
    end
  end

  // ---------------- routing score array ----------------
  logic                    rs_clear, rs_valid;
  logic [SC_TOK-1:0]       rs_spk;
  logic signed [WGT_W-1:0] rs_w [EXPERTS];
  logic signed [19:0]      rs_score [SC_TOK][EXPERTS];

  always_comb begin
    for (int n = 0; n < SC_TOK; n++)
      rs_spk[n] = g_rdata[0][(int'(half) * SC_TOK + n) * TSTEPS + int'(ts_d)];
    for (int e = 0; e < EXPERTS; e++)
      rs_w[e] = g_rdata[1][e*WGT_W +: WGT_W];
  end

  assign rs_clear = (state == S_RCLR);
  assign rs_valid = rd_d && ((state == S_RSTREAM) || (state == S_RDRAIN));

  routing_score_array #(.TOKENS(SC_TOK), .EXPERTS(EXPERTS), .ACC_W(20)) u_rsa (
    .clk(clk), .rst_n(rst_n), .clear(rs_clear), .valid(rs_valid),
    .spikes(rs_spk), .wr(rs_w), .score(rs_score));

  // ---------------- token router ----------------
  logic [EXPERTS-1:0] mask [TILE];
  word_t              pack_out [CORES];
  logic [$clog2(TILE+1)-1:0] pack_count [CORES];
  word_t              merge_in [CORES];
  word_t              merge_out;

  token_router #(.TILE_TOK(TILE), .TSTEPS(TSTEPS), .SC_TOK(SC_TOK),
                 .EXPERTS(EXPERTS), .CORES(CORES), .TOPK(TOPK), .ACC_W(20)) u_router (
    .clk(clk), .rst_n(rst_n), .num_experts(num_experts),
    .score_valid(state == S_RSCORE), .score_half(half), .score(rs_score),
    .mask(mask), .round(round), .pack_in(g_rdata[0]), .pack_out(pack_out),
    .pack_count(pack_count), .merge_in(merge_in), .merge_old(g_rdata[0]),
    .merge_first(round == '0), .merge_out(merge_out));

  // ---------------- expert cores ----------------
  logic           c_start [CORES];
  logic           c_busy  [CORES];
  logic           c_done  [CORES];
  logic           c_act_en [CORES], c_act_we [CORES], c_w_en [CORES];
  logic [LAW-1:0] c_act_addr [CORES], c_w_addr [CORES];
  word_t          c_act_wdata [CORES], c_act_rdata [CORES], c_w_wdata [CORES];

  for (genvar c = 0; c < CORES; c++) begin : g_core
    se_core #(.ROWS(ROWS), .COLS(COLS), .TSTEPS(TSTEPS), .LB_DEPTH(LB_DEPTH),
              .ACT_OUT_BASE(ACT_OUT_BASE)) u_se (
      .clk(clk), .rst_n(rst_n), .d_in(d_in), .d_out(d_out), .vth(vth),
      .vleak(vleak), .start(c_start[c]), .busy(c_busy[c]), .done(c_done[c]),
      .act_en(c_act_en[c]), .act_we(c_act_we[c]), .act_addr(c_act_addr[c]),
      .act_wdata(c_act_wdata[c]), .act_rdata(c_act_rdata[c]),
      .w_en(c_w_en[c]), .w_addr(c_w_addr[c]), .w_wdata(c_w_wdata[c]));
    assign merge_in[c] = c_act_rdata[c];
  end

  // expert weight slot in its GLB
  function automatic logic [GAW-1:0] exp_base(input int e);
    return GAW'(((e / 4) * 2 + (e % 2)) * EXP_STRIDE);
  endfunction

  // ---------------- memory port control ----------------
  always_comb begin
    for (int i = 0; i < 3; i++) begin
      g_en[i] = 1'b0; g_we[i] = 1'b0; g_addr[i] = '0; g_wdata[i] = host_wdata;
    end
    for (int c = 0; c < CORES; c++) begin
      c_start[c]     = 1'b0;
      c_act_en[c]    = 1'b0;
      c_act_we[c]    = 1'b0;
      c_act_addr[c]  = k_d;
      c_act_wdata[c] = pack_out[c];
      c_w_en[c]      = 1'b0;
      c_w_addr[c]    = pcnt_d;
      c_w_wdata[c]   = (c < 2) ? g_rdata[1] : g_rdata[2];
    end
    case (state)
      S_IDLE: begin
        for (int i = 0; i < 3; i++) begin
          g_en[i]   = host_en && (int'(host_sel) == i);
          g_we[i]   = host_we;
          g_addr[i] = host_addr;
        end
        for (int c = 0; c < CORES; c++) c_start[c] = 1'b0;
      end
      S_RSTREAM: begin
        g_en[0]   = 1'b1;
        g_addr[0] = in_base + GAW'(k);
        g_en[1]   = 1'b1;
        g_addr[1] = GAW'(WR_BASE) + GAW'(ts) * GAW'(d_in) + GAW'(k);
      end
      S_DISP: begin
        g_en[0]   = (k < d_in);
        g_addr[0] = in_base + GAW'(k);
        for (int c = 0; c < CORES; c++) begin
          c_act_en[c] = rd_d && core_act[c];
          c_act_we[c] = 1'b1;
        end
      end
      S_PRE: begin
        // pass 0 serves cores 0 (GLB A) and 2 (GLB B), pass 1 cores 1 and 3
        g_en[1]   = (pcnt < exp_words) && need_pre[int'(pass)];
        g_addr[1] = exp_base(int'(round) * CORES + int'(pass)) + GAW'(pcnt);
        g_en[2]   = (pcnt < exp_words) && need_pre[2 + int'(pass)];
        g_addr[2] = exp_base(int'(round) * CORES + 2 + int'(pass)) + GAW'(pcnt);
        c_w_en[int'(pass)]     = rd_d && need_pre[int'(pass)];
        c_w_en[2 + int'(pass)] = rd_d && need_pre[2 + int'(pass)];
      end
      S_COMP: begin
        for (int c = 0; c < CORES; c++) c_start[c] = (dcnt == 0) && core_act[c];
      end
      S_MERGE: begin
        // phase dcnt[0]=0: read cores and the old word; phase 1: write merged
        g_en[0]   = (k < d_out);
        g_we[0]   = dcnt[0];
        g_addr[0] = out_base + GAW'(k);
        g_wdata[0] = merge_out;
        for (int c = 0; c < CORES; c++) begin
          c_act_en[c]   = !dcnt[0] && (k < d_out);
          c_act_we[c]   = 1'b0;
          c_act_addr[c] = LAW'(ACT_OUT_BASE) + k;
        end
      end
      default: ;
    endcase
  end

  // ---------------- sequencer ----------------
  logic any_busy;
  logic [2:0] n_need, n_skip;
  always_comb begin
    any_busy = 1'b0;
    n_need   = '0;
    n_skip   = '0;
    for (int c = 0; c < CORES; c++) begin
      any_busy |= c_busy[c];
      if (core_act[c] && need_pre[c])  n_need = n_need + 1'b1;
      if (core_act[c] && !need_pre[c]) n_skip = n_skip + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      k <= '0; k_d <= '0; ts <= '0; ts_d <= '0; half <= 1'b0; rd_d <= 1'b0;
      dcnt <= '0; round <= '0; pass <= 1'b0; pcnt <= '0; pcnt_d <= '0;
      done <= 1'b0;
      n_rounds <= '0; n_preloads <= '0; n_preload_skips <= '0;
      for (int e = 0; e < EXPERTS; e++) n_routed[e] <= '0;
      for (int c = 0; c < CORES; c++) begin
        loaded_id[c] <= '0;
        loaded_ok[c] <= 1'b0;
      end
    end else begin
      done   <= 1'b0;
      k_d    <= k;
      ts_d   <= ts;
      pcnt_d <= pcnt;
      rd_d   <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          half  <= 1'b0;
          round <= '0;
          state <= S_RCLR;
        end
        S_RCLR: begin
          k <= '0; ts <= '0;
          state <= S_RSTREAM;
        end
        S_RSTREAM: begin
          rd_d <= 1'b1;
          if (32'(ts) == TSTEPS - 1) begin
            ts <= '0;
            k  <= k + 1'b1;
            if (k == d_in - 1'b1) begin
              dcnt  <= '0;
              state <= S_RDRAIN;
            end
          end else begin
            ts <= ts + 1'b1;
          end
        end
        S_RDRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (32'(dcnt) == RLAT) state <= S_RSCORE;
        end
        S_RSCORE: begin
          if (!half) begin
            half  <= 1'b1;
            state <= S_RCLR;
          end else begin
            k     <= '0;
            state <= S_DISP;
          end
        end
        S_DISP: begin
          rd_d <= (k < d_in);
          k    <= k + 1'b1;
          if (k == d_in) begin
            pass  <= 1'b0;
            pcnt  <= '0;
            state <= S_PRE;
            n_preloads      <= n_preloads + 16'(n_need);
            n_preload_skips <= n_preload_skips + 16'(n_skip);
            for (int e = 0; e < EXPERTS; e++)
              if (e / CORES == int'(round))
                n_routed[e] <= n_routed[e] + 16'(pack_count[e % CORES]);
          end
        end
        S_PRE: begin
          rd_d <= (pcnt < exp_words);
          pcnt <= pcnt + 1'b1;
          if (pcnt == exp_words) begin
            pcnt <= '0;
            if (!pass) begin
              pass <= 1'b1;
            end else begin
              for (int c = 0; c < CORES; c++)
                if (core_act[c]) begin
                  loaded_ok[c] <= 1'b1;
                  loaded_id[c] <= EW'(int'(round) * CORES + c);
                end
              dcnt  <= '0;
              state <= S_COMP;
            end
          end
        end
        S_COMP: begin
          dcnt <= 8'd1;
          if (dcnt != 0 && !any_busy) begin
            k     <= '0;
            dcnt  <= '0;
            state <= S_MERGE;
          end
        end
        S_MERGE: begin
          dcnt[0] <= !dcnt[0];
          if (dcnt[0]) begin
            k <= k + 1'b1;
            if (k == d_out - 1'b1) state <= S_NEXT;
          end
        end
        S_NEXT: begin
          n_rounds <= n_rounds + 1'b1;
          if ((int'(round) + 1) * CORES < int'(num_experts)) begin
            round <= round + 1'b1;
            k     <= '0;
            state <= S_DISP;
          end else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !host_en);
  a_glb_a_share: assert property (@(posedge clk) disable iff (!rst_n)
                                  (state == S_PRE) |-> !(c_w_en[0] && c_w_en[1]));
endmodule

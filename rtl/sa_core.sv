// sa_core: modularized spiking attention expert core. It runs one attention
// head through the kernel-fused steps: spiking attention map A = Q K^T per
// timestep, attention-weighted integration X = A V, membrane accumulation
// and conditional spike generation.
//
// Buffers. Top tier: expert LB A holds Q (from address 0) and K (from
// K_BASE), expert LB B holds V (from 0) and the output spikes (from
// OUT_BASE), the synaptic integration LB keeps the membrane potentials
// between timesteps. A Q/K/V/output word packs 8 tokens x 16 features of one
// timestep: address base + t*(n_tok/8) + n/8, bit (n%8)*16 + f. Bottom
// tier: the Q, K/V tile registers (16 tokens x 16 features each) and the X
// accumulator, which keeps X for 16 query tokens while the key tiles are
// swept.
//
// Schedule, for each timestep t and each 16-token query tile qt:
//   for each key tile kt: load the K and V tiles (and the Q tile once),
//     mode 0: clear A, stream the 16 features of Q (rows) and K (columns);
//     mode 1: stream the 16 features of V down the columns and add the
//             row outputs leaving the right edge to X[nq][f];
//   then 32 generator steps of 8 neurons: read the membrane word (zero at
//   t = 0), V = V + X - vleak, spike if V > vth and reset, write it back;
//   finally write the 16 x 16 output spikes to LB B.
// done pulses after the last tile. Per (t, qt) the core takes
// 3 + (n_tok/16)*108 + 99 cycles: 108 per key tile (load 3, clear 1, two
// array passes of 16 steps + 36 drain), 96 generator, 3 write-back. Attention counts use 8 bits and X uses
// 16 bits. The buffer address map, the 8-neuron generator width and the
// tile loop order are choices of this implementation; the array size, the
// two array modes and the buffer roles follow the source design.
module sa_core
  import snn_pkg::*;
#(
  parameter int P        = 16,     // array size = tokens per tile = head width
  parameter int LB_DEPTH = 3072,
  parameter int K_BASE   = 1536,
  parameter int OUT_BASE = 1536,
  parameter int LANES    = 8,
  localparam int AW = $clog2(LB_DEPTH)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [AW-1:0]          n_tok,     // multiple of P
  input  logic [3:0]             tsteps,
  input  logic signed [SI_W-1:0] vth,
  input  logic signed [SI_W-1:0] vleak,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  // LB A write port (Q, K), idle only
  input  logic                   a_en,
  input  logic [AW-1:0]          a_addr,
  input  word_t                  a_wdata,
  // LB B port (V write, output read), idle only
  input  logic                   b_en,
  input  logic                   b_we,
  input  logic [AW-1:0]          b_addr,
  input  word_t                  b_wdata,
  output word_t                  b_rdata
);
  localparam int TPW   = WORD_W / P;        // tokens per word (8)
  localparam int WPT   = P / TPW;           // words per tile (2)
  localparam int GPR   = P / LANES;         // generator steps per row (2)
  localparam int GSTEPS = P * GPR;          // generator steps per tile (32)
  localparam int DRAIN = 2 * P + 3;

  typedef enum logic [3:0] {S_IDLE, S_LOADQ, S_LOADK, S_M1CLR, S_M1, S_M2,
                            S_GEN, S_WRITE, S_NEXT} state_t;
  state_t state;

  logic [3:0]    t;
  logic [AW-1:0] qt, kt;
  logic [7:0]    cnt;
  logic [1:0]    ph;
  logic [AW-1:0] nw;                 // words per timestep = n_tok / TPW
  logic [AW-1:0] ntile;

  assign nw    = n_tok / AW'(TPW);
  assign ntile = n_tok / AW'(P);
  assign busy  = (state != S_IDLE);

  // ---------------- buffers ----------------
  logic          la_en, la_we, lb_en, lb_we, si_en, si_we;
  logic [AW-1:0] la_addr, lb_addr, si_addr;
  word_t         la_wdata, la_rdata, lb_wdata, lb_rdata, si_wdata, si_rdata;

  sram_sp #(.DEPTH(LB_DEPTH), .WIDTH(WORD_W)) u_lb_a (
    .clk(clk), .en(la_en), .we(la_we), .addr(la_addr), .wdata(la_wdata),
    .wmask('1), .rdata(la_rdata));
  sram_sp #(.DEPTH(LB_DEPTH), .WIDTH(WORD_W)) u_lb_b (
    .clk(clk), .en(lb_en), .we(lb_we), .addr(lb_addr), .wdata(lb_wdata),
    .wmask('1), .rdata(lb_rdata));
  sram_sp #(.DEPTH(LB_DEPTH), .WIDTH(WORD_W)) u_si_lb (
    .clk(clk), .en(si_en), .we(si_we), .addr(si_addr), .wdata(si_wdata),
    .wmask('1), .rdata(si_rdata));

  assign b_rdata = lb_rdata;

  logic [P-1:0]           qtile [P];      // [token][feature]
  logic [P-1:0]           ktile [P];
  logic [P-1:0]           vtile [P];
  logic [P-1:0]           otile [P];
  logic signed [SI_W-1:0] xacc  [P][P];   // [query token][feature]
  logic [$clog2(P+1)-1:0] fcnt  [P];

  // ---------------- array ----------------
  logic            arr_mode, arr_clear, arr_valid;
  logic [P-1:0]    arr_q, arr_kv;
  logic [SI_W-1:0] x_out [P];
  logic [P-1:0]    x_valid;
  logic [7:0]      a_map [P][P];

  rpe_array #(.ROWS(P), .COLS(P), .A_W(8), .X_W(SI_W)) u_array (
    .clk(clk), .rst_n(rst_n), .mode(arr_mode), .clear_a(arr_clear),
    .valid(arr_valid), .q_in(arr_q), .kv_in(arr_kv),
    .x_out(x_out), .x_valid(x_valid), .a(a_map));

  assign arr_mode  = (state == S_M2);
  assign arr_clear = (state == S_M1CLR);
  assign arr_valid = ((state == S_M1) || (state == S_M2)) && (32'(cnt) < P);

  always_comb begin
    for (int i = 0; i < P; i++) begin
      arr_q[i]  = (32'(cnt) < P) ? qtile[i][cnt[$clog2(P)-1:0]] : 1'b0;
      arr_kv[i] = (32'(cnt) < P) ? ((state == S_M2) ? vtile[i][cnt[$clog2(P)-1:0]]
                                                    : ktile[i][cnt[$clog2(P)-1:0]]) : 1'b0;
    end
  end

  // ---------------- generators ----------------
  logic                   gen_in_valid, gen_out_valid;
  logic signed [SI_W-1:0] gen_x  [LANES][1];
  logic signed [SI_W-1:0] gen_v0 [LANES];
  logic signed [SI_W-1:0] gen_vf [LANES];
  logic [LANES-1:0]       gen_spk;
  logic [$clog2(P)-1:0]   g_row;
  logic [$clog2(GPR+1)-1:0] g_grp;

  assign g_row = cnt[$clog2(GSTEPS)-1:$clog2(GPR)];
  assign g_grp = ($clog2(GPR+1))'(cnt[$clog2(GPR)-1:0]);

  always_comb begin
    for (int j = 0; j < LANES; j++) begin
      gen_x[j][0] = xacc[g_row][int'(g_grp)*LANES + j];
      gen_v0[j]   = (t == 0) ? '0 : $signed(si_rdata[j*SI_W +: SI_W]);
    end
  end

  assign gen_in_valid = (state == S_GEN) && (ph == 2'd1);

  lif_generator #(.GROUPS(LANES), .TSTEPS(1)) u_gen (
    .clk(clk), .rst_n(rst_n), .in_valid(gen_in_valid), .x(gen_x),
    .v_init(gen_v0), .vth(vth), .vleak(vleak), .out_valid(gen_out_valid),
    .spikes(gen_spk), .v_final(gen_vf));

  // ---------------- buffer port control ----------------
  always_comb begin
    la_en = 1'b0; la_we = 1'b0; la_addr = '0; la_wdata = a_wdata;
    lb_en = 1'b0; lb_we = 1'b0; lb_addr = '0; lb_wdata = b_wdata;
    si_en = 1'b0; si_we = 1'b0; si_addr = qt * AW'(GSTEPS) + AW'(cnt); si_wdata = '0;
    for (int j = 0; j < LANES; j++) si_wdata[j*SI_W +: SI_W] = gen_vf[j];
    case (state)
      S_IDLE: begin
        la_en = a_en; la_we = 1'b1; la_addr = a_addr;
        lb_en = b_en; lb_we = b_we; lb_addr = b_addr;
      end
      S_LOADQ: begin
        la_en   = (32'(cnt) < WPT);
        la_addr = AW'(t) * nw + qt * AW'(WPT) + AW'(cnt);
      end
      S_LOADK: begin
        la_en   = (32'(cnt) < WPT);
        la_addr = AW'(K_BASE) + AW'(t) * nw + kt * AW'(WPT) + AW'(cnt);
        lb_en   = (32'(cnt) < WPT);
        lb_addr = AW'(t) * nw + kt * AW'(WPT) + AW'(cnt);
      end
      S_GEN: begin
        si_en = ((ph == 2'd0) && (t != 0)) || (ph == 2'd2);
        si_we = (ph == 2'd2);
      end
      S_WRITE: begin
        lb_en   = (32'(cnt) < WPT);
        lb_we   = 1'b1;
        lb_addr = AW'(OUT_BASE) + AW'(t) * nw + qt * AW'(WPT) + AW'(cnt);
        lb_wdata = '0;
        for (int j = 0; j < TPW; j++)
          lb_wdata[j*P +: P] = otile[(int'(cnt) % WPT) * TPW + j];
      end
      default: ;
    endcase
  end

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      t <= '0; qt <= '0; kt <= '0; cnt <= '0; ph <= '0;
      done <= 1'b0;
      for (int i = 0; i < P; i++) begin
        qtile[i] <= '0; ktile[i] <= '0; vtile[i] <= '0; otile[i] <= '0;
        fcnt[i]  <= '0;
        for (int f = 0; f < P; f++) xacc[i][f] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          t <= '0; qt <= '0; kt <= '0; cnt <= '0;
          for (int i = 0; i < P; i++) for (int f = 0; f < P; f++) xacc[i][f] <= '0;
          state <= S_LOADQ;
        end
        S_LOADQ: begin
          cnt <= cnt + 1'b1;
          if (cnt >= 1 && 32'(cnt) <= WPT)
            for (int j = 0; j < TPW; j++)
              qtile[(int'(cnt) - 1) * TPW + j] <= la_rdata[j*P +: P];
          if (32'(cnt) == WPT) begin
            cnt   <= '0;
            state <= S_LOADK;
          end
        end
        S_LOADK: begin
          cnt <= cnt + 1'b1;
          if (cnt >= 1 && 32'(cnt) <= WPT)
            for (int j = 0; j < TPW; j++) begin
              ktile[(int'(cnt) - 1) * TPW + j] <= la_rdata[j*P +: P];
              vtile[(int'(cnt) - 1) * TPW + j] <= lb_rdata[j*P +: P];
            end
          if (32'(cnt) == WPT) state <= S_M1CLR;
        end
        S_M1CLR: begin
          cnt   <= '0;
          state <= S_M1;
        end
        S_M1: begin
          cnt <= cnt + 1'b1;
          if (32'(cnt) == P + DRAIN) begin
            cnt <= '0;
            for (int i = 0; i < P; i++) fcnt[i] <= '0;
            state <= S_M2;
          end
        end
        S_M2: begin
          cnt <= cnt + 1'b1;
          for (int i = 0; i < P; i++)
            if (x_valid[i]) begin
              xacc[i][fcnt[i][$clog2(P)-1:0]] <= sat_si((SI_W+2)'(xacc[i][fcnt[i][$clog2(P)-1:0]])
                                                        + (SI_W+2)'($signed(x_out[i])));
              fcnt[i] <= fcnt[i] + 1'b1;
            end
          if (32'(cnt) == P + DRAIN) begin
            cnt <= '0;
            if (kt + 1'b1 < ntile) begin
              kt    <= kt + 1'b1;
              state <= S_LOADK;
            end else begin
              ph    <= '0;
              state <= S_GEN;
            end
          end
        end
        S_GEN: begin
          ph <= ph + 1'b1;
          if (ph == 2'd2) begin
            otile[g_row][int'(g_grp)*LANES +: LANES] <= gen_spk;
            ph  <= '0;
            cnt <= cnt + 1'b1;
            if (32'(cnt) == GSTEPS - 1) begin
              cnt   <= '0;
              state <= S_WRITE;
            end
          end
        end
        S_WRITE: begin
          cnt <= cnt + 1'b1;
          if (32'(cnt) == WPT - 1) state <= S_NEXT;
        end
        S_NEXT: begin
          cnt <= '0;
          kt  <= '0;
          for (int i = 0; i < P; i++) for (int f = 0; f < P; f++) xacc[i][f] <= '0;
          if (qt + 1'b1 < ntile) begin
            qt    <= qt + 1'b1;
            state <= S_LOADQ;
          end else if (t + 1'b1 < tsteps) begin
            qt    <= '0;
            t     <= t + 1'b1;
            state <= S_LOADQ;
          end else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_idle_access: assert property (@(posedge clk) disable iff (!rst_n)
                                  busy |-> !(a_en || b_en));
endmodule

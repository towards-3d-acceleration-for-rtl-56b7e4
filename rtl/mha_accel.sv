// mha_accel: spiking multi-head attention accelerator. A spiking activation
// GLB, the spiking attention dispatcher and four modularized spiking
// attention expert cores (sa_core), one attention head per core. One start
// runs a whole attention layer for n_tok tokens, tsteps timesteps and
// num_heads heads of 16 features (head h = features 16h..16h+15), in rounds
// of four heads (head h on core h mod 4 in round h / 4):
//   1 dispatch : read every Q, K and V word from the Act GLB once, cut out
//                the 16-bit slice of each core's head and pack 8 tokens per
//                word into the cores' local buffers;
//   2 compute  : all active cores run the kernel-fused attention;
//   3 write    : read the output spikes back from the cores and write them
//                through to the Act GLB, concatenating the heads: every core
//                writes its own 16 bits of each token word under a bit mask.
// Act GLB layout (own choice): one word per (timestep t, token n) holding
// all features, Q at q_base + t*n_tok + n, likewise K, V and the output.
// Host access to the Act GLB only while busy is low.
module mha_accel
  import snn_pkg::*;
#(
  parameter int GLB_DEPTH = 8192,
  parameter int LB_DEPTH  = 3072,
  parameter int P         = 16,
  parameter int MAX_HEADS = 8,
  localparam int GAW = $clog2(GLB_DEPTH),
  localparam int LAW = $clog2(LB_DEPTH),
  localparam int HW  = $clog2(MAX_HEADS+1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   host_en,
  input  logic                   host_we,
  input  logic [GAW-1:0]         host_addr,
  input  word_t                  host_wdata,
  output word_t                  host_rdata,
  input  logic [LAW-1:0]         n_tok,
  input  logic [3:0]             tsteps,
  input  logic [HW-1:0]          num_heads,
  input  logic [GAW-1:0]         q_base,
  input  logic [GAW-1:0]         k_base,
  input  logic [GAW-1:0]         v_base,
  input  logic [GAW-1:0]         out_base,
  input  logic signed [SI_W-1:0] vth,
  input  logic signed [SI_W-1:0] vleak,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  output logic [15:0]            n_rounds,
  output logic [15:0]            n_dispatched
);
  localparam int CORES    = NUM_CORES;
  localparam int TPW      = WORD_W / P;      // tokens per LB word
  localparam int K_BASE   = 1536;
  localparam int OUT_BASE = 1536;
  localparam int RW       = $clog2(MAX_HEADS/CORES+1);

  typedef enum logic [2:0] {S_IDLE, S_DISP, S_COMP, S_WB, S_NEXT} state_t;
  state_t state;
  assign busy = (state != S_IDLE);

  // ---------------- Act GLB ----------------
  logic           g_en, g_we;
  logic [GAW-1:0] g_addr;
  word_t          g_wdata, g_wmask, g_rdata;

  sram_sp #(.DEPTH(GLB_DEPTH), .WIDTH(WORD_W)) u_act_glb (
    .clk(clk), .en(g_en), .we(g_we), .addr(g_addr), .wdata(g_wdata),
    .wmask(g_wmask), .rdata(g_rdata));
  assign host_rdata = g_rdata;

  // ---------------- dispatcher state ----------------
  logic [RW-1:0]  round;
  logic [1:0]     mat, mat_d;          // 0 Q, 1 K, 2 V
  logic [GAW-1:0] idx, idx_d, total;   // word index t*n_tok + n
  logic           rd_d;
  logic [3:0]     ph;
  logic           started;
  word_t          pack [CORES];
  word_t          pack_nx [CORES];
  logic           core_act [CORES];

  assign total = GAW'(tsteps) * GAW'(n_tok);

  always_comb begin
    for (int c = 0; c < CORES; c++) begin
      int h;
      h = int'(round) * CORES + c;
      core_act[c] = h < int'(num_heads);
      pack_nx[c]  = pack[c];
      pack_nx[c][(int'(idx_d) % TPW) * P +: P] = g_rdata[(h % MAX_HEADS) * P +: P];
    end
  end

  // ---------------- cores ----------------
  logic           c_start [CORES], c_busy [CORES], c_done [CORES];
  logic           c_a_en [CORES], c_b_en [CORES], c_b_we [CORES];
  logic [LAW-1:0] c_a_addr [CORES], c_b_addr [CORES];
  word_t          c_b_rdata [CORES];
  logic           wr_word;

  assign wr_word = rd_d && ((int'(idx_d) % TPW) == TPW - 1);

  for (genvar c = 0; c < CORES; c++) begin : g_core
    sa_core #(.P(P), .LB_DEPTH(LB_DEPTH), .K_BASE(K_BASE), .OUT_BASE(OUT_BASE)) u_sa (
      .clk(clk), .rst_n(rst_n), .n_tok(n_tok), .tsteps(tsteps), .vth(vth),
      .vleak(vleak), .start(c_start[c]), .busy(c_busy[c]), .done(c_done[c]),
      .a_en(c_a_en[c]), .a_addr(c_a_addr[c]), .a_wdata(pack_nx[c]),
      .b_en(c_b_en[c]), .b_we(c_b_we[c]), .b_addr(c_b_addr[c]),
      .b_wdata(pack_nx[c]), .b_rdata(c_b_rdata[c]));
  end

  always_comb begin
    int h;
    h = 0;
    g_en = 1'b0; g_we = 1'b0; g_addr = '0; g_wdata = host_wdata; g_wmask = '1;
    for (int c = 0; c < CORES; c++) begin
      c_start[c]  = 1'b0;
      c_a_en[c]   = 1'b0;
      c_a_addr[c] = ((mat_d == 2'd1) ? LAW'(K_BASE) : '0) + LAW'(idx_d / GAW'(TPW));
      c_b_en[c]   = 1'b0;
      c_b_we[c]   = 1'b1;
      c_b_addr[c] = LAW'(idx_d / GAW'(TPW));
    end
    case (state)
      S_IDLE: begin
        g_en = host_en; g_we = host_we; g_addr = host_addr;
      end
      S_DISP: begin
        g_en   = (idx < total);
        g_addr = ((mat == 2'd0) ? q_base : (mat == 2'd1) ? k_base : v_base) + idx;
        for (int c = 0; c < CORES; c++) begin
          c_a_en[c] = wr_word && core_act[c] && (mat_d != 2'd2);
          c_b_en[c] = wr_word && core_act[c] && (mat_d == 2'd2);
        end
      end
      S_COMP: begin
        for (int c = 0; c < CORES; c++) c_start[c] = !started && core_act[c];
      end
      S_WB: begin
        // ph 0: read the cores' output word; ph 1..TPW: write one token each
        for (int c = 0; c < CORES; c++) begin
          c_b_en[c]   = (ph == 0);
          c_b_we[c]   = 1'b0;
          c_b_addr[c] = LAW'(OUT_BASE) + LAW'(idx);
        end
        g_en    = (ph != 0);
        g_we    = 1'b1;
        g_addr  = out_base + idx * GAW'(TPW) + GAW'(ph) - 1'b1;
        g_wdata = '0;
        g_wmask = '0;
        for (int c = 0; c < CORES; c++) begin
          h = int'(round) * CORES + c;
          if (core_act[c]) begin
            g_wdata[(h % MAX_HEADS) * P +: P] = c_b_rdata[c][(int'(ph) - 1) % TPW * P +: P];
            g_wmask[(h % MAX_HEADS) * P +: P] = '1;
          end
        end
      end
      default: ;
    endcase
  end

  logic any_busy;
  always_comb begin
    any_busy = 1'b0;
    for (int c = 0; c < CORES; c++) any_busy |= c_busy[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      round <= '0; mat <= '0; mat_d <= '0; idx <= '0; idx_d <= '0;
      rd_d <= 1'b0; ph <= '0; started <= 1'b0; done <= 1'b0;
      n_rounds <= '0; n_dispatched <= '0;
      for (int c = 0; c < CORES; c++) pack[c] <= '0;
    end else begin
      done  <= 1'b0;
      rd_d  <= 1'b0;
      idx_d <= idx;
      mat_d <= mat;
      if (rd_d) pack <= pack_nx;
      if (wr_word) n_dispatched <= n_dispatched + 1'b1;
      case (state)
        S_IDLE: if (start) begin
          round <= '0; mat <= '0; idx <= '0;
          state <= S_DISP;
        end
        S_DISP: begin
          if (idx < total) begin
            rd_d <= 1'b1;
            idx  <= idx + 1'b1;
          end else if (mat != 2'd2) begin
            mat <= mat + 1'b1;
            idx <= '0;
          end else if (!rd_d) begin
            started <= 1'b0;
            state   <= S_COMP;
          end
        end
        S_COMP: begin
          started <= 1'b1;
          if (started && !any_busy) begin
            idx   <= '0;
            ph    <= '0;
            state <= S_WB;
          end
        end
        S_WB: begin
          ph <= ph + 1'b1;
          if (32'(ph) == TPW) begin
            ph  <= '0;
            idx <= idx + 1'b1;
            if (idx + 1'b1 == total / GAW'(TPW)) state <= S_NEXT;
          end
        end
        S_NEXT: begin
          n_rounds <= n_rounds + 1'b1;
          if ((int'(round) + 1) * CORES < int'(num_heads)) begin
            round <= round + 1'b1;
            mat   <= '0;
            idx   <= '0;
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
endmodule

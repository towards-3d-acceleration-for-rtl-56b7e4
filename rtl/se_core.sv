// se_core: modularized spiking expert (SE) core. It executes the kernel-
// fused intra-expert steps for the tokens routed to it: synaptic integration
// in the systolic PE array (bottom tier), then membrane accumulation and
// conditional spike generation in the parallel spiking generators (top
// tier).
//
// Local buffers (3K x 128b each): the activation LB holds the routed input
// spikes, one word per input feature k at address k (bit j*T+t = packed
// token j at timestep t), and receives the output spikes at
// ACT_OUT_BASE + o for output neuron o (same bit layout). The weight LB
// holds W[k][o] for 16 consecutive neurons per word: address oc*d_in + k,
// bits [8*r +: 8] = weight of neuron oc*16+r (signed).
//
// Operation after start: for each group oc of ROWS output neurons the array
// is cleared, d_in (weight word, spike word) pairs are streamed from the two
// LBs, one per cycle, the array drains for ROWS+COLS cycles, and the ROWS
// rows of synaptic integrations are read out one row per cycle through the
// generators (32 tokens x T timesteps each, membrane starting at 0) and
// written to the activation LB. done pulses when all d_out/ROWS groups are
// finished. A group takes d_in + 2*ROWS + COLS + 5 cycles; done comes one
// cycle after the last group.
//
// While the core is idle the two LBs are accessible through the lb_* ports
// (loading by the router / weight GLBs, reading out the results). The
// address split of the activation LB (ACT_OUT_BASE) and the one-row-per-
// cycle readout are choices of this implementation.
module se_core
  import snn_pkg::*;
#(
  parameter int ROWS         = 16,
  parameter int COLS         = 128,
  parameter int TSTEPS       = T_DEF,
  parameter int LB_DEPTH     = 3072,
  parameter int ACT_OUT_BASE = 1024,
  localparam int AW = $clog2(LB_DEPTH)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // configuration
  input  logic [AW-1:0]          d_in,
  input  logic [AW-1:0]          d_out,      // multiple of ROWS
  input  logic signed [SI_W-1:0] vth,
  input  logic signed [SI_W-1:0] vleak,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  // activation LB port (idle only)
  input  logic                   act_en,
  input  logic                   act_we,
  input  logic [AW-1:0]          act_addr,
  input  word_t                  act_wdata,
  output word_t                  act_rdata,
  // weight LB port (idle only, write)
  input  logic                   w_en,
  input  logic [AW-1:0]          w_addr,
  input  word_t                  w_wdata
);
  localparam int GROUPS = COLS / TSTEPS;
  localparam int LAT    = ROWS + COLS;

  typedef enum logic [2:0] {S_IDLE, S_CLR, S_STREAM, S_DRAIN, S_GEN, S_NEXT} state_t;
  state_t state;

  logic [AW-1:0] k, wa, oc, r;
  logic [$clog2(LAT+4)-1:0] dcnt;
  logic          rd_d;            // LB read issued last cycle

  // LB ports
  logic          a_en, a_we, b_en;
  logic [AW-1:0] a_addr, b_addr;
  word_t         a_wdata, a_rdata, b_rdata;

  // array
  logic                    arr_clear;
  logic signed [WGT_W-1:0] w_vec [ROWS];
  logic signed [SI_W-1:0]  si [ROWS][COLS];

  // generators
  logic                    gen_in_valid, gen_out_valid;
  logic signed [SI_W-1:0]  gen_x [GROUPS][TSTEPS];
  logic signed [SI_W-1:0]  gen_v0 [GROUPS];
  logic signed [SI_W-1:0]  gen_vf [GROUPS];
  logic [COLS-1:0]         gen_spk;
  logic [AW-1:0]           r_d;

  assign busy = (state != S_IDLE);

  sram_sp #(.DEPTH(LB_DEPTH), .WIDTH(WORD_W)) u_act_lb (
    .clk(clk), .en(a_en), .we(a_we), .addr(a_addr), .wdata(a_wdata),
    .wmask('1), .rdata(a_rdata));

  sram_sp #(.DEPTH(LB_DEPTH), .WIDTH(WORD_W)) u_w_lb (
    .clk(clk), .en(b_en), .we(!busy), .addr(b_addr), .wdata(w_wdata),
    .wmask('1), .rdata(b_rdata));

  assign act_rdata = a_rdata;

  always_comb begin
    if (busy) begin
      a_en    = (state == S_STREAM) || gen_out_valid;
      a_we    = gen_out_valid;
      a_addr  = gen_out_valid ? AW'(ACT_OUT_BASE) + oc * AW'(ROWS) + r_d : k;
      a_wdata = WORD_W'(gen_spk);
      b_en    = (state == S_STREAM);
      b_addr  = wa;
    end else begin
      a_en    = act_en;
      a_we    = act_we;
      a_addr  = act_addr;
      a_wdata = act_wdata;
      b_en    = w_en;
      b_addr  = w_addr;
    end
  end

  // weight buffer / spike buffer feeding the array
  always_comb begin
    for (int i = 0; i < ROWS; i++) w_vec[i] = b_rdata[i*WGT_W +: WGT_W];
  end

  se_pe_array #(.ROWS(ROWS), .COLS(COLS), .WGT_W(WGT_W), .ACC_W(SI_W)) u_array (
    .clk  (clk),
    .rst_n(rst_n),
    .clear(arr_clear),
    .valid(rd_d),
    .w_in (w_vec),
    .s_in (a_rdata[COLS-1:0]),
    .si   (si)
  );

  // 3D extraction of one PE row into the generators
  always_comb begin
    for (int g = 0; g < GROUPS; g++) begin
      gen_v0[g] = '0;
      for (int t = 0; t < TSTEPS; t++) gen_x[g][t] = si[r[$clog2(ROWS)-1:0]][g*TSTEPS + t];
    end
  end

  lif_generator #(.GROUPS(GROUPS), .TSTEPS(TSTEPS)) u_gen (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (gen_in_valid),
    .x        (gen_x),
    .v_init   (gen_v0),
    .vth      (vth),
    .vleak    (vleak),
    .out_valid(gen_out_valid),
    .spikes   (gen_spk),
    .v_final  (gen_vf)
  );

  assign gen_in_valid = (state == S_GEN) && (32'(r) < ROWS);
  assign arr_clear    = (state == S_CLR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      k     <= '0;
      wa    <= '0;
      oc    <= '0;
      r     <= '0;
      r_d   <= '0;
      dcnt  <= '0;
      rd_d  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      rd_d <= (state == S_STREAM);
      r_d  <= r;
      case (state)
        S_IDLE: if (start) begin
          oc    <= '0;
          wa    <= '0;
          state <= S_CLR;
        end
        S_CLR: begin
          k     <= '0;
          state <= S_STREAM;
        end
        S_STREAM: begin
          k  <= k + 1'b1;
          wa <= wa + 1'b1;
          if (k == d_in - 1'b1) begin
            dcnt  <= '0;
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (32'(dcnt) == LAT) begin
            r     <= '0;
            state <= S_GEN;
          end
        end
        S_GEN: begin
          if (32'(r) < ROWS) r <= r + 1'b1;
          else if (!gen_out_valid) state <= S_NEXT;
        end
        S_NEXT: begin
          if (oc + 1'b1 >= (d_out / AW'(ROWS))) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            oc    <= oc + 1'b1;
            state <= S_CLR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the external LB ports may only be used while the core is idle
  a_idle_access: assert property (@(posedge clk) disable iff (!rst_n)
                                  busy |-> !(act_en || w_en));
endmodule

// spiking_transformer_top: the two accelerators of a spiking MoE transformer
// encoder side by side: the spiking multi-head attention accelerator
// (mha_accel) and the spiking mixture-of-experts accelerator (moe_accel).
// Each keeps its own activation GLB and host port; a host runs a layer by
// loading a GLB, configuring and starting the accelerator and reading the
// result back. The attention output can be moved into the MoE Act GLB by
// the host (the residual additions, the tokenizer and the classification
// head of the network are not part of the hardware). Every port of the two
// accelerators is brought out with a moe_ / mha_ prefix.
module spiking_transformer_top
  import snn_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  // ---- MoE accelerator ----
  input  logic                   moe_host_en,
  input  logic                   moe_host_we,
  input  logic [1:0]             moe_host_sel,
  input  logic [12:0]            moe_host_addr,
  input  word_t                  moe_host_wdata,
  output word_t                  moe_host_rdata,
  input  logic [3:0]             moe_num_experts,
  input  logic [11:0]            moe_d_in,
  input  logic [11:0]            moe_d_out,
  input  logic [12:0]            moe_in_base,
  input  logic [12:0]            moe_out_base,
  input  logic signed [SI_W-1:0] moe_vth,
  input  logic signed [SI_W-1:0] moe_vleak,
  input  logic                   moe_start,
  output logic                   moe_busy,
  output logic                   moe_done,
  output logic [15:0]            moe_n_rounds,
  output logic [15:0]            moe_n_preloads,
  output logic [15:0]            moe_n_preload_skips,
  output logic [15:0]            moe_n_routed [8],
  // ---- MHA accelerator ----
  input  logic                   mha_host_en,
  input  logic                   mha_host_we,
  input  logic [12:0]            mha_host_addr,
  input  word_t                  mha_host_wdata,
  output word_t                  mha_host_rdata,
  input  logic [11:0]            mha_n_tok,
  input  logic [3:0]             mha_tsteps,
  input  logic [3:0]             mha_num_heads,
  input  logic [12:0]            mha_q_base,
  input  logic [12:0]            mha_k_base,
  input  logic [12:0]            mha_v_base,
  input  logic [12:0]            mha_out_base,
  input  logic signed [SI_W-1:0] mha_vth,
  input  logic signed [SI_W-1:0] mha_vleak,
  input  logic                   mha_start,
  output logic                   mha_busy,
  output logic                   mha_done,
  output logic [15:0]            mha_n_rounds,
  output logic [15:0]            mha_n_dispatched
);
  moe_accel u_moe (
    .clk(clk), .rst_n(rst_n),
    .host_en(moe_host_en), .host_we(moe_host_we), .host_sel(moe_host_sel),
    .host_addr(moe_host_addr), .host_wdata(moe_host_wdata), .host_rdata(moe_host_rdata),
    .num_experts(moe_num_experts), .d_in(moe_d_in), .d_out(moe_d_out),
    .in_base(moe_in_base), .out_base(moe_out_base), .vth(moe_vth), .vleak(moe_vleak),
    .start(moe_start), .busy(moe_busy), .done(moe_done),
    .n_rounds(moe_n_rounds), .n_preloads(moe_n_preloads),
    .n_preload_skips(moe_n_preload_skips), .n_routed(moe_n_routed));

  mha_accel u_mha (
    .clk(clk), .rst_n(rst_n),
    .host_en(mha_host_en), .host_we(mha_host_we), .host_addr(mha_host_addr),
    .host_wdata(mha_host_wdata), .host_rdata(mha_host_rdata),
    .n_tok(mha_n_tok), .tsteps(mha_tsteps), .num_heads(mha_num_heads),
    .q_base(mha_q_base), .k_base(mha_k_base), .v_base(mha_v_base),
    .out_base(mha_out_base), .vth(mha_vth), .vleak(mha_vleak),
    .start(mha_start), .busy(mha_busy), .done(mha_done),
    .n_rounds(mha_n_rounds), .n_dispatched(mha_n_dispatched));
endmodule

// routing_score_array: expert routing score array of the spiking token
// router (default 16 tokens x 8 experts). It computes the gating score of
// every expert for a tile of tokens, I[n][e] = sum_{t,k} Wr[t][k][e] *
// S[n][t][k], with the same spike-selected accumulate PE as the expert
// cores: routing weights of expert e travel along row e, spikes of token n
// along column n. One (t,k) pair is presented per step (valid); after the
// last step and TOKENS+EXPERTS-1 more cycles the scores are stable on score[n][e]
// (the vertical extraction to the router). Accumulators are 20 bits, enough
// for 512 steps of 8-bit weights (own choice).
module routing_score_array
  import snn_pkg::*;
#(
  parameter int TOKENS  = 16,
  parameter int EXPERTS = 8,
  parameter int ACC_W   = 20
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    valid,
  input  logic [TOKENS-1:0]       spikes,              // S[n][t][k], n = 0..TOKENS-1
  input  logic signed [WGT_W-1:0] wr     [EXPERTS],    // Wr[t][k][e]
  output logic signed [ACC_W-1:0] score  [TOKENS][EXPERTS]
);
  logic signed [ACC_W-1:0] si [EXPERTS][TOKENS];

  se_pe_array #(.ROWS(EXPERTS), .COLS(TOKENS), .WGT_W(WGT_W), .ACC_W(ACC_W)) u_arr (
    .clk  (clk),
    .rst_n(rst_n),
    .clear(clear),
    .valid(valid),
    .w_in (wr),
    .s_in (spikes),
    .si   (si)
  );

  always_comb begin
    for (int n = 0; n < TOKENS; n++)
      for (int e = 0; e < EXPERTS; e++)
        score[n][e] = si[e][n];
  end
endmodule

// token_router: top-tier spiking token router of the MoE accelerator. It
// performs the two inter-expert steps: conditional routing and aligned
// merging.
//  * Routing: when score_valid is high the router takes the scores of 16
//    tokens (half score_half of a 32-token tile) from the routing score
//    array, picks the TOPK highest among the first num_experts experts (ties
//    go to the lower expert index) and stores the binary top-K mask.
//  * Packing: pack_in is one activation word of the tile (one input feature,
//    bit j*T+t = token j at timestep t). For each core c the router gathers
//    the tokens routed to expert round*CORES+c, in token order, into the low
//    columns of pack_out[c] (combinational). pack_count gives the number.
//  * Merging: merge_in[c] is an output word of core c in the same packed
//    column order. merge_out puts every token's spikes back at its own
//    columns, ORed over the experts it was routed to (for top-1 this is the
//    selection itself) and ORed with merge_old unless merge_first (the
//    earlier rounds' result when there are more experts than cores).
// The OR used to merge several experts and the packing order are choices of
// this implementation; the source only says outputs are merged and aligned.
module token_router
  import snn_pkg::*;
#(
  parameter int TILE_TOK = 32,
  parameter int TSTEPS   = T_DEF,
  parameter int SC_TOK   = 16,
  parameter int EXPERTS  = 8,
  parameter int CORES    = NUM_CORES,
  parameter int TOPK     = 1,
  parameter int ACC_W    = 20,
  localparam int EW = $clog2(EXPERTS+1),
  localparam int RW = $clog2(EXPERTS/CORES+1),
  localparam int HW = (TILE_TOK/SC_TOK > 1) ? $clog2(TILE_TOK/SC_TOK) : 1,
  localparam int CW = $clog2(TILE_TOK+1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [EW-1:0]           num_experts,
  input  logic                    score_valid,
  input  logic [HW-1:0]           score_half,
  input  logic signed [ACC_W-1:0] score [SC_TOK][EXPERTS],
  output logic [EXPERTS-1:0]      mask  [TILE_TOK],
  input  logic [RW-1:0]           round,
  input  word_t                   pack_in,
  output word_t                   pack_out   [CORES],
  output logic [CW-1:0]           pack_count [CORES],
  input  word_t                   merge_in   [CORES],
  input  word_t                   merge_old,
  input  logic                    merge_first,
  output word_t                   merge_out
);
  // ---------------- top-K selection ----------------
  logic [EXPERTS-1:0] sel_c [SC_TOK];

  always_comb begin
    for (int n = 0; n < SC_TOK; n++) begin
      sel_c[n] = '0;
      for (int k = 0; k < TOPK; k++) begin
        logic found;
        int   best;
        found = 1'b0;
        best  = 0;
        for (int e = 0; e < EXPERTS; e++) begin
          if (e < int'(num_experts) && !sel_c[n][e]) begin
            if (!found || score[n][e] > score[n][best]) begin
              found = 1'b1;
              best  = e;
            end
          end
        end
        if (found) sel_c[n][best] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < TILE_TOK; j++) mask[j] <= '0;
    end else if (score_valid) begin
      for (int n = 0; n < SC_TOK; n++)
        mask[int'(score_half)*SC_TOK + n] <= sel_c[n];
    end
  end

  // ---------------- packed slot of each token ----------------
  logic            hit  [TILE_TOK][CORES];
  logic [CW-1:0]   slot [TILE_TOK][CORES];

  always_comb begin
    for (int c = 0; c < CORES; c++) begin
      int e;
      logic [CW-1:0] cnt;
      e   = int'(round) * CORES + c;
      cnt = '0;
      for (int j = 0; j < TILE_TOK; j++) begin
        hit[j][c]  = (e < EXPERTS) && (e < int'(num_experts)) && mask[j][e % EXPERTS];
        slot[j][c] = cnt;
        if (hit[j][c]) cnt = cnt + 1'b1;
      end
      pack_count[c] = cnt;
    end
  end

  // ---------------- packing ----------------
  always_comb begin
    for (int c = 0; c < CORES; c++) begin
      pack_out[c] = '0;
      for (int j = 0; j < TILE_TOK; j++)
        if (hit[j][c])
          pack_out[c][int'(slot[j][c])*TSTEPS +: TSTEPS] = pack_in[j*TSTEPS +: TSTEPS];
    end
  end

  // ---------------- aligned merging ----------------
  always_comb begin
    merge_out = merge_first ? '0 : merge_old;
    for (int j = 0; j < TILE_TOK; j++)
      for (int c = 0; c < CORES; c++)
        if (hit[j][c])
          merge_out[j*TSTEPS +: TSTEPS] = merge_out[j*TSTEPS +: TSTEPS]
                                        | merge_in[c][int'(slot[j][c])*TSTEPS +: TSTEPS];
  end
endmodule

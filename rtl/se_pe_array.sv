// se_pe_array: dense spatiotemporal systolic array of a spiking expert core
// (default 16 x 128 PEs). Rows are output neurons, columns are (token,
// timestep) pairs. Each step the caller presents, for one input feature k,
// the ROWS multi-bit weights W[k][row] and the COLS 1-bit spikes S[col][k].
// Weights travel left to right along their row, spikes top to bottom along
// their column; input skew registers delay row r by r cycles and column c by
// c cycles so that matching operands meet in PE(r,c). ROWS+COLS-1 clock
// edges after the edge that takes the last step every PE holds
// sum_k S[col][k] * W[k][row], readable in parallel on si. clear zeroes all
// accumulators; steps with valid low contribute nothing.
module se_pe_array #(
  parameter int ROWS  = 16,
  parameter int COLS  = 128,
  parameter int WGT_W = 8,
  parameter int ACC_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    valid,
  input  logic signed [WGT_W-1:0] w_in  [ROWS],
  input  logic [COLS-1:0]         s_in,
  output logic signed [ACC_W-1:0] si    [ROWS][COLS]
);
  // operands after the input skew
  logic signed [WGT_W-1:0] w_sk [ROWS];
  logic                    s_sk [COLS];
  // inter-PE links: w_link[r][c] enters PE(r,c); s_link[r][c] enters PE(r,c)
  logic signed [WGT_W-1:0] w_link [ROWS][COLS+1];
  logic                    s_link [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_wskew
    if (r == 0) begin : g_d0
      assign w_sk[r] = valid ? w_in[r] : '0;
    end else begin : g_dn
      logic signed [WGT_W-1:0] dly [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < r; i++) dly[i] <= '0;
        end else begin
          dly[0] <= valid ? w_in[r] : '0;
          for (int i = 1; i < r; i++) dly[i] <= dly[i-1];
        end
      end
      assign w_sk[r] = dly[r-1];
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_sskew
    if (c == 0) begin : g_d0
      assign s_sk[c] = valid & s_in[c];
    end else begin : g_dn
      logic [c-1:0] dly;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) dly <= '0;
        else if (c == 1) dly[0] <= valid & s_in[c];
        else dly <= c'({dly, valid & s_in[c]});
      end
      assign s_sk[c] = dly[c-1];
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign w_link[r][0] = w_sk[r];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      if (r == 0) begin : g_top
        assign s_link[0][c] = s_sk[c];
      end
      se_pe #(.WGT_W(WGT_W), .ACC_W(ACC_W)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .clear    (clear),
        .spike_in (s_link[r][c]),
        .w_in     (w_link[r][c]),
        .spike_out(s_link[r+1][c]),
        .w_out    (w_link[r][c+1]),
        .si       (si[r][c])
      );
    end
  end
endmodule

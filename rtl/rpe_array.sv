// rpe_array: reconfigurable spiking attention array (default 16 x 16 R-PEs)
// of an attention expert core. Row nq belongs to a query token, column nk to
// a key token.
//  mode 0: each step the caller gives, for one feature f, q_in[nq] = Q[nq][f]
//          and kv_in[nk] = K[nk][f]. Queries flow right, keys flow down
//          (input skew: row r delayed r cycles, column c delayed c cycles),
//          and PE(nq,nk) counts Q AND K: A[nq][nk] = sum_f Q[nq][f]K[nk][f].
//          The map stays inside the array (no multi-bit data movement).
//  mode 1: each step gives kv_in[nk] = V[nk][f] for one feature f. Values
//          flow down; along each row the partial sums
//          sum_nk A[nq][nk] V[nk][f] flow right and leave the right edge on
//          x_out[nq] with x_valid[nq]. Row nq emits the features in input
//          order, feature f nq + COLS + 1 cycles after it was given.
// Steps with valid low carry zeros. clear_a zeroes all attention registers.
module rpe_array #(
  parameter int ROWS = 16,
  parameter int COLS = 16,
  parameter int A_W  = 8,
  parameter int X_W  = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             mode,
  input  logic             clear_a,
  input  logic             valid,
  input  logic [ROWS-1:0]  q_in,
  input  logic [COLS-1:0]  kv_in,
  output logic [X_W-1:0]   x_out   [ROWS],
  output logic [ROWS-1:0]  x_valid,
  output logic [A_W-1:0]   a       [ROWS][COLS]
);
  logic q_sk [ROWS];
  logic kv_sk [COLS];
  logic kvv_sk [COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_qskew
    if (r == 0) begin : g_d0
      assign q_sk[r] = valid & q_in[r];
    end else begin : g_dn
      logic [r-1:0] dly;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) dly <= '0;
        else if (r == 1) dly[0] <= valid & q_in[r];
        else dly <= r'({dly, valid & q_in[r]});
      end
      assign q_sk[r] = dly[r-1];
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_kskew
    if (c == 0) begin : g_d0
      assign kv_sk[c]  = valid & kv_in[c];
      assign kvv_sk[c] = valid;
    end else begin : g_dn
      logic [c-1:0] dly, vdly;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          dly  <= '0;
          vdly <= '0;
        end else if (c == 1) begin
          dly[0]  <= valid & kv_in[c];
          vdly[0] <= valid;
        end else begin
          dly  <= c'({dly, valid & kv_in[c]});
          vdly <= c'({vdly, valid});
        end
      end
      assign kv_sk[c]  = dly[c-1];
      assign kvv_sk[c] = vdly[c-1];
    end
  end

  logic           kv_l  [ROWS+1][COLS];
  logic           kvv_l [ROWS+1][COLS];
  logic           q_l   [ROWS][COLS+1];
  logic [X_W-1:0] x_l   [ROWS][COLS+1];
  logic           xv_l  [ROWS][COLS+1];

  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign kv_l[0][c]  = kv_sk[c];
    assign kvv_l[0][c] = kvv_sk[c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign q_l[r][0]  = q_sk[r];
    assign x_l[r][0]  = '0;
    // a row's partial sum starts valid when column 0 holds a valid value
    assign xv_l[r][0] = mode & kvv_l[r+1][0];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      rpe #(.A_W(A_W), .X_W(X_W)) u_rpe (
        .clk    (clk),
        .rst_n  (rst_n),
        .mode   (mode),
        .clear_a(clear_a),
        .kv_in  (kv_l[r][c]),
        .kvv_in (kvv_l[r][c]),
        .kv_out (kv_l[r+1][c]),
        .kvv_out(kvv_l[r+1][c]),
        .q_in   (q_l[r][c]),
        .q_out  (q_l[r][c+1]),
        .x_in   (x_l[r][c]),
        .xv_in  (xv_l[r][c]),
        .x_out  (x_l[r][c+1]),
        .xv_out (xv_l[r][c+1]),
        .a      (a[r][c])
      );
    end
    assign x_out[r]   = x_l[r][COLS];
    assign x_valid[r] = xv_l[r][COLS];
  end
endmodule

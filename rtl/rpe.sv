// rpe: reconfigurable processing element R-PE(nq,nk) of the spiking attention
// array. A vertical register (K reg in mode 1, V reg in mode 2) takes the
// spike from the PE above and passes it down; a horizontal 1-bit query
// register takes the query spike from the left and passes it right.
//  mode 0 (A = QK): the attention register adds (query AND key) each cycle,
//                   so after d features it holds the spike count Q[nq].K[nk].
//  mode 1 (X = AV): the attention register is held; a 2:1 multiplexer picks
//                   0 or the attention value by the value spike and the sum
//                   with the partial integration from the left PE is
//                   registered in the X register and passed right.
// clear_a zeroes the attention register. xv_in/xv_out tag valid partial sums.
module rpe #(
  parameter int A_W = 8,
  parameter int X_W = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           mode,       // 0: A = QK, 1: X = AV
  input  logic           clear_a,
  input  logic           kv_in,
  input  logic           kvv_in,     // valid of the vertical operand (mode 1)
  output logic           kv_out,
  output logic           kvv_out,
  input  logic           q_in,
  output logic           q_out,
  input  logic [X_W-1:0] x_in,
  input  logic           xv_in,
  output logic [X_W-1:0] x_out,
  output logic           xv_out,
  output logic [A_W-1:0] a
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kv_out  <= 1'b0;
      kvv_out <= 1'b0;
      q_out   <= 1'b0;
      x_out   <= '0;
      xv_out  <= 1'b0;
      a       <= '0;
    end else begin
      kv_out  <= kv_in;
      kvv_out <= kvv_in;
      q_out   <= q_in;
      if (clear_a)
        a <= '0;
      else if (!mode && (q_out & kv_out))
        a <= a + 1'b1;
      x_out  <= x_in + ((mode && kv_out) ? X_W'(a) : '0);
      xv_out <= xv_in;
    end
  end
endmodule

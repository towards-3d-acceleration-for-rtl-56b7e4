// se_pe: one processing element of the spiking expert array, synaptic-
// integration stationary. Each cycle it registers the spike arriving from
// above (passed on downward: spike reuse) and the weight arriving from the
// left (passed on to the right: weight reuse). A 2:1 multiplexer selects 0
// or the registered weight by the registered spike and an adder accumulates
// the selection into the synaptic integration register, whose value is read
// out in parallel (the 3D-extractable port). clear zeroes the register.
module se_pe #(
  parameter int WGT_W = 8,
  parameter int ACC_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    spike_in,
  input  logic signed [WGT_W-1:0] w_in,
  output logic                    spike_out,
  output logic signed [WGT_W-1:0] w_out,
  output logic signed [ACC_W-1:0] si
);
  logic signed [WGT_W-1:0] sel;

  assign sel = spike_out ? w_out : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spike_out <= 1'b0;
      w_out     <= '0;
      si        <= '0;
    end else begin
      spike_out <= spike_in;
      w_out     <= w_in;
      if (clear) si <= '0;
      else       si <= si + ACC_W'(sel);
    end
  end
endmodule

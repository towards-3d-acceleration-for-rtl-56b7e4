// lif_generator: parallel spiking generators. GROUPS x TSTEPS leaky
// integrate-and-fire neurons evaluated in one cycle. Within a group the lanes
// are consecutive timesteps of one neuron: lane (g,t) adds its synaptic
// integration x to the membrane left by lane (g,t-1) (v_init for t = 0),
// subtracts vleak, fires when the result exceeds vth and is then reset to 0.
// That is V[t] = V[t-1] + X[t] - Vleak; S[t] = V[t] > Vth; V[t] = 0 on a
// spike. Sums saturate to 16 bits. Results (spikes, v_final = membrane after
// the last lane of the group) are registered: out_valid follows in_valid by
// one cycle. The spiking MoE core uses GROUPS=32, TSTEPS=4 (a whole PE row
// of 32 tokens x 4 timesteps); the attention core uses TSTEPS=1 and keeps
// the membrane between timesteps in its local buffer. The lane count is a
// choice of this implementation.
module lif_generator
  import snn_pkg::*;
#(
  parameter int GROUPS = 32,
  parameter int TSTEPS = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [SI_W-1:0] x      [GROUPS][TSTEPS],
  input  logic signed [SI_W-1:0] v_init [GROUPS],
  input  logic signed [SI_W-1:0] vth,
  input  logic signed [SI_W-1:0] vleak,
  output logic                   out_valid,
  output logic [GROUPS*TSTEPS-1:0] spikes,  // bit g*TSTEPS+t
  output logic signed [SI_W-1:0] v_final [GROUPS]
);
  logic [GROUPS*TSTEPS-1:0] spk_c;
  logic signed [SI_W-1:0]   vf_c [GROUPS];

  always_comb begin
    for (int g = 0; g < GROUPS; g++) begin
      logic signed [SI_W-1:0] v;
      v = v_init[g];
      for (int t = 0; t < TSTEPS; t++) begin
        v = sat_si((SI_W+2)'(v) + (SI_W+2)'(x[g][t]) - (SI_W+2)'(vleak));
        if (v > vth) begin
          spk_c[g*TSTEPS+t] = 1'b1;
          v = '0;
        end else begin
          spk_c[g*TSTEPS+t] = 1'b0;
        end
      end
      vf_c[g] = v;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      spikes    <= '0;
      for (int g = 0; g < GROUPS; g++) v_final[g] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        spikes  <= spk_c;
        v_final <= vf_c;
      end
    end
  end
endmodule

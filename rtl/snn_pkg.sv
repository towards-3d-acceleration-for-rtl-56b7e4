// snn_pkg: constants and types shared by the spiking MoE and spiking MHA
// accelerators. All memories are 128 bits wide, weights are 8-bit signed and
// synaptic integrations / membrane potentials are 16-bit signed, as in the
// quantisation the design targets. The timestep count default (4) is a choice
// of this implementation; the source design does not state it.
package snn_pkg;
  localparam int WORD_W    = 128;  // width of every SRAM macro
  localparam int WGT_W     = 8;    // expert and routing weight width
  localparam int SI_W      = 16;   // synaptic integration / membrane width
  localparam int NUM_CORES = 4;    // modularized expert cores per accelerator
  localparam int T_DEF     = 4;    // timesteps (own choice)

  typedef logic [WORD_W-1:0] word_t;

  // Saturate a wide signed value into SI_W bits.
  function automatic logic signed [SI_W-1:0] sat_si(input logic signed [SI_W+1:0] v);
    if (v > $signed((SI_W+2)'((1 << (SI_W-1)) - 1)))
      return {1'b0, {(SI_W-1){1'b1}}};
    else if (v < -$signed((SI_W+2)'(1 << (SI_W-1))))
      return {1'b1, {(SI_W-1){1'b0}}};
    else
      return v[SI_W-1:0];
  endfunction
endpackage

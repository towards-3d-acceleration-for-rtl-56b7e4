// tb_ref_pkg: reference arithmetic shared by the testbenches, written
// independently of the RTL: a 16-bit saturating leaky integrate-and-fire
// step, V = V + X - Vleak, spike when V > Vth, reset to 0 on a spike.
package tb_ref_pkg;
  function automatic int sat16(input int v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  // one LIF step; returns the spike and updates v
  function automatic bit lif_step(inout int v, input int x, input int vth, input int vleak);
    v = sat16(v + x - vleak);
    if (v > vth) begin
      v = 0;
      return 1'b1;
    end
    return 1'b0;
  endfunction
endpackage

// tb_lif_generator: random integrations, initial membranes, thresholds and
// leaks against the reference LIF step; checks the one-cycle latency, the
// timestep chaining within a group and saturation.
module tb_lif_generator;
  import tb_ref_pkg::*;
  localparam int G = 5, TS = 3;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [15:0] x [G][TS];
  logic signed [15:0] v_init [G];
  logic signed [15:0] vth, vleak;
  logic [G*TS-1:0] spikes;
  logic signed [15:0] v_final [G];
  int checks = 0, failures = 0;

  lif_generator #(.GROUPS(G), .TSTEPS(TS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vth = 0; vleak = 0;
    for (int g = 0; g < G; g++) begin
      v_init[g] = 0;
      for (int t = 0; t < TS; t++) x[g][t] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int v, e_spk [G*TS], e_vf [G];
      bit big;
      big = (n % 10) == 0;
      vth   = 16'($urandom_range(200));
      vleak = 16'($urandom_range(20));
      for (int g = 0; g < G; g++) begin
        v_init[g] = big ? 16'sd30000 : 16'($signed($urandom_range(300)) - 150);
        for (int t = 0; t < TS; t++)
          x[g][t] = big ? 16'sd20000 : 16'($signed($urandom_range(300)) - 100);
      end
      if (big) vth = 16'sd32767;
      for (int g = 0; g < G; g++) begin
        v = v_init[g];
        for (int t = 0; t < TS; t++) e_spk[g*TS+t] = lif_step(v, x[g][t], vth, vleak);
        e_vf[g] = v;
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int g = 0; g < G; g++) begin
        checks++;
        if (v_final[g] != 16'(e_vf[g])) begin
          failures++;
          $display("n %0d g %0d vf %0d vs %0d", n, g, v_final[g], e_vf[g]);
        end
        for (int t = 0; t < TS; t++) begin
          checks++;
          if (spikes[g*TS+t] != 1'(e_spk[g*TS+t])) failures++;
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

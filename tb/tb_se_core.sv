// tb_se_core: a reduced expert core (4 x 16 PE array, 4 timesteps) with 12
// input features and 8 output neurons. Loads random spikes and weights into
// the local buffers, runs the core, checks every output spike against a
// reference (integration, then the LIF chain over timesteps), and checks the
// run time: per group of ROWS neurons d_in + 2*ROWS + COLS + 5 cycles, plus one.
module tb_se_core;
  import snn_pkg::*;
  import tb_ref_pkg::*;
  localparam int R = 4, C = 16, TS = 4, DIN = 12, DOUT = 8, OB = 128;
  logic clk = 0, rst_n = 0;
  logic [7:0] d_in = DIN, d_out = DOUT;
  logic signed [15:0] vth = 16'sd40, vleak = 16'sd3;
  logic start = 0, busy, done;
  logic act_en = 0, act_we = 0, w_en = 0;
  logic [7:0] act_addr = '0, w_addr = '0;
  word_t act_wdata = '0, act_rdata, w_wdata = '0;
  int checks = 0, failures = 0;
  int wt [DIN][DOUT];
  bit sp [DIN][C];

  se_core #(.ROWS(R), .COLS(C), .TSTEPS(TS), .LB_DEPTH(256), .ACT_OUT_BASE(OB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cycles;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < DIN; k++) begin
      for (int c = 0; c < C; c++) sp[k][c] = 1'($urandom);
      for (int o = 0; o < DOUT; o++) wt[k][o] = $signed($urandom_range(60)) - 20;
    end
    for (int k = 0; k < DIN; k++) begin
      @(negedge clk);
      act_en = 1; act_we = 1; act_addr = 8'(k); act_wdata = {$urandom, $urandom, $urandom, $urandom};
      for (int c = 0; c < C; c++) act_wdata[c] = sp[k][c];
    end
    for (int oc = 0; oc < DOUT / R; oc++)
      for (int k = 0; k < DIN; k++) begin
        @(negedge clk);
        act_en = 0;
        w_en = 1; w_addr = 8'(oc * DIN + k); w_wdata = '0;
        for (int r = 0; r < R; r++) w_wdata[r*8 +: 8] = 8'(wt[k][oc*R + r]);
      end
    @(negedge clk);
    w_en = 0; start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
    checks++;
    if (cycles != (DOUT / R) * (DIN + 2 * R + C + 5) + 1) begin
      failures++;
      $display("run took %0d cycles", cycles);
    end
    for (int o = 0; o < DOUT; o++) begin
      @(negedge clk);
      act_en = 1; act_we = 0; act_addr = 8'(OB + o);
      @(negedge clk);
      act_en = 0;
      for (int g = 0; g < C / TS; g++) begin
        int v;
        v = 0;
        for (int t = 0; t < TS; t++) begin
          int x;
          bit e;
          x = 0;
          for (int k = 0; k < DIN; k++) if (sp[k][g*TS+t]) x += wt[k][o];
          e = lif_step(v, x, 40, 3);
          checks++;
          if (act_rdata[g*TS+t] !== e) begin
            failures++;
            $display("neuron %0d token %0d t %0d: %b vs %b", o, g, t, act_rdata[g*TS+t], e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

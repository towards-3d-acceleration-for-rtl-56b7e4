// tb_token_router: random routing scores for a 32-token tile with six
// experts; checks the stored top-1 mask (argmax over the enabled experts,
// lowest index on ties), the per-core token packing and the aligned merge
// in both expert rounds, with and without the earlier round's word.
module tb_token_router;
  import snn_pkg::*;
  localparam int TILE = 32, TS = 4, SC = 16, NE = 8, NC = 4;
  logic clk = 0, rst_n = 0;
  logic [3:0] num_experts;
  logic score_valid = 0;
  logic [0:0] score_half;
  logic signed [19:0] score [SC][NE];
  logic [NE-1:0] mask [TILE];
  logic [1:0] round;
  word_t pack_in, pack_out [NC], merge_in [NC], merge_old, merge_out;
  logic [5:0] pack_count [NC];
  logic merge_first;
  int checks = 0, failures = 0;
  int sc [TILE][NE];
  int best [TILE];

  token_router dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    num_experts = 4'd6; round = '0; pack_in = '0; merge_old = '0; merge_first = 1;
    score_half = '0;
    for (int c = 0; c < NC; c++) merge_in[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < TILE; j++) begin
      for (int e = 0; e < NE; e++) sc[j][e] = $signed($urandom_range(40)) - 20;
      if (j % 7 == 0) sc[j][3] = sc[j][1];           // force some ties
      if (j % 5 == 0) sc[j][7] = 1000;               // disabled expert wins
      best[j] = 0;
      for (int e = 1; e < 6; e++) if (sc[j][e] > sc[j][best[j]]) best[j] = e;
    end
    for (int h = 0; h < 2; h++) begin
      @(negedge clk);
      score_valid = 1; score_half = 1'(h);
      for (int n = 0; n < SC; n++)
        for (int e = 0; e < NE; e++) score[n][e] = 20'(sc[h*SC+n][e]);
      @(negedge clk);
      score_valid = 0;
    end
    for (int j = 0; j < TILE; j++) begin
      checks++;
      if (mask[j] !== NE'(1 << best[j])) begin
        failures++;
        $display("token %0d mask %b best %0d", j, mask[j], best[j]);
      end
    end
    for (int r = 0; r < 2; r++) begin
      for (int it = 0; it < 20; it++) begin
        word_t expm;
        round = 2'(r);
        pack_in = {$urandom, $urandom, $urandom, $urandom};
        merge_old = {$urandom, $urandom, $urandom, $urandom};
        merge_first = (it % 2 == 0);
        for (int c = 0; c < NC; c++) merge_in[c] = {$urandom, $urandom, $urandom, $urandom};
        #1;
        expm = merge_first ? '0 : merge_old;
        for (int c = 0; c < NC; c++) begin
          int e, slot;
          word_t expp;
          e = r * NC + c;
          slot = 0;
          expp = '0;
          for (int j = 0; j < TILE; j++)
            if (e < 6 && best[j] == e) begin
              expp[slot*TS +: TS] = pack_in[j*TS +: TS];
              expm[j*TS +: TS] = expm[j*TS +: TS] | merge_in[c][slot*TS +: TS];
              slot++;
            end
          checks += 2;
          if (pack_out[c] !== expp) begin
            failures++;
            $display("round %0d core %0d pack mismatch", r, c);
          end
          if (int'(pack_count[c]) != slot) failures++;
        end
        checks++;
        if (merge_out !== expm) begin
          failures++;
          $display("round %0d merge mismatch", r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

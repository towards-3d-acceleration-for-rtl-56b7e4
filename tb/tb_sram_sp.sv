// tb_sram_sp: random masked writes and reads against a reference array;
// checks the one-cycle read latency.
module tb_sram_sp;
  localparam int DEPTH = 64, WIDTH = 32;
  logic clk = 0, en = 0, we = 0;
  logic [5:0] addr = '0;
  logic [WIDTH-1:0] wdata = '0, wmask = '0, rdata;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  sram_sp #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // initialise every word
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 6'(i); wdata = $urandom; wmask = '1;
      ref_mem[i] = wdata;
    end
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      en = 1; addr = 6'($urandom_range(DEPTH-1));
      if ($urandom_range(1)) begin
        we = 1; wdata = $urandom; wmask = $urandom;
        ref_mem[addr] = (ref_mem[addr] & ~wmask) | (wdata & wmask);
      end else begin
        logic [WIDTH-1:0] exp;
        we = 0; exp = ref_mem[addr];
        @(negedge clk); en = 0;
        checks++;
        if (rdata !== exp) begin
          failures++;
          $display("mismatch addr %0d: %h vs %h", addr, rdata, exp);
        end
      end
    end
    // rdata holds while en is low
    @(negedge clk); en = 1; we = 0; addr = 6'd3;
    @(negedge clk); en = 0; addr = 6'd4;
    @(negedge clk); checks++;
    if (rdata !== ref_mem[3]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

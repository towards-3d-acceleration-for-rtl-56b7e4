// sram_sp: single-port synchronous SRAM, the model used for every memory macro
// of the accelerators (activation and weight global buffers, expert local
// buffers). One access per cycle: a write stores wdata under a bit mask, a read
// returns the addressed word on rdata one cycle after en is sampled. The
// default geometry 8K x 128b is the global-buffer macro; local buffers use
// 3K x 128b. The bit write mask is an assumption (compiler macros commonly
// offer one); the accelerators use it to merge partial words.
module sram_sp #(
  parameter int DEPTH = 8192,
  parameter int WIDTH = 128,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [WIDTH-1:0] wmask,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en && we && (32'(addr) < DEPTH))
      mem[addr] <= (mem[addr] & ~wmask) | (wdata & wmask);
    if (en && !we)
      rdata <= (32'(addr) < DEPTH) ? mem[addr] : '0;
  end
endmodule

// sram_sp: single-port synchronous SRAM, written as an array.
//
// Every on-chip memory of the accelerator is built from this cell: the four
// 512x16 cells of each PE's filter/feature scratch pad, the 512x16 partial-sum
// scratch pad, and the input (64 KB), private (128 KB), output (64 KB) and
// global (256 KB) buffers. One access per cycle: when `en` is high the word at
// `addr` is written with `wdata` if `we` is high, otherwise read. Read data
// appears on `rdata` one cycle after the request and holds until the next
// read. A write does not change `rdata`. Contents are not reset, as in an SRAM
// macro; the word width and depth are parameters, the single port follows the
// paper's "single port" scratch-pad cells.
module sram_sp #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule

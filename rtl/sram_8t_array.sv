// sram_8t_array: weight storage of one NM-CALC division, an array of 8T SRAM
// cells written as a memory.
//
// The 8T cell has a write port (write word line, write bit lines) that is
// separate from its read port (read word line, single-ended read bit line), so
// the array is modelled with one independent write port and one read port.
// Each word holds one encoded weight: the 2-bit shift code read from "two
// columns" as the paper puts it. A read issued in cycle t presents its data in
// cycle t+1 (sense latch); rdata holds its value while re is low. A write and
// a read of the same word in one cycle return the old contents.
// Cell contents are not reset. Word width follows the paper; depth and timing
// are this design's choice.
module sram_8t_array #(
  parameter int unsigned WIDTH = 2,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  // write port
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  // read port
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule

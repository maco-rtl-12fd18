// sram_buffer: one on-chip buffer of the matrix engine (A, B or C buffer).
//
// A simple-dual-port memory: one synchronous write port and one synchronous
// read port of WIDTH bits. Read data appears the cycle after re. A read and
// a write to the same word in one cycle return the old contents. The source
// design gives 192KB of buffers in total; three equal 64KB buffers of
// 256-bit words (DEPTH = 2048) are this design's split. In silicon this is an
// SRAM macro; here it is an array that synthesis maps to a memory.
module sram_buffer #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned WIDTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule

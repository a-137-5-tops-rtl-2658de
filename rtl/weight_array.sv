// weight_array: weight storage of the 9-T cells of one core.
//
// 64 rows x 16 column engines x 4 bits. Each row of an engine holds one
// sign-magnitude weight: W[3] is the sign cell, W[2:0] the magnitude cells. Every
// stored bit drives its cell's discharge branch (magnitude cells) or the sign logic
// (sign cell), so all bits are outputs at once. Writing is one weight per clock
// through the row/column write port; the write takes effect at the clock edge.
// The cells have no reset, like any SRAM: the weights must be written before use.
// The array size is the paper's; the write-port shape is this design's.
module weight_array
  import cim_pkg::*;
(
  input  logic                     clk,
  input  logic                     we,        // write one weight
  input  logic [$clog2(ROWS)-1:0]  wrow,      // row to write
  input  logic [$clog2(COLS)-1:0]  wcol,      // engine to write
  input  logic [WGT_W-1:0]         wdata,     // {sign, magnitude[2:0]}
  output logic [WGT_W-1:0]         w [COLS][ROWS] // stored weights
);
  logic [WGT_W-1:0] mem [COLS][ROWS];

  always_ff @(posedge clk)
    if (we) mem[wcol][wrow] <= wdata;

  assign w = mem;

endmodule

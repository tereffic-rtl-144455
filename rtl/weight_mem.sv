// Weight memory (UltraRAM): all packed ternary weights of the card's layers.
//
// Each row is one LANES x LANES weight tile in 1.6-bit form: LANES columns of
// COL_BITS = 8*BYTES_PER_COL bits, column c at [c*COL_BITS +: COL_BITS].
// The read port returns a whole row, one cycle after re, which is the
// bandwidth the matrix core needs to consume one tile per cycle. The host
// loads the memory one column at a time through the write port (the load
// path is this design's choice). The default depth of 2352 rows holds
// 12 layers of the 370M-parameter model with 1024-wide hidden state and
// 2816-wide feed-forward layer (12 x 196 tiles), about 31 MB.
module weight_mem #(
  parameter int LANES         = 256,
  parameter int BYTES_PER_COL = (LANES + 4) / 5,
  parameter int ROWS          = 2352,
  localparam int COL_BITS     = 8 * BYTES_PER_COL,
  localparam int AW           = $clog2(ROWS),
  localparam int CW           = $clog2(LANES)
) (
  input  logic                         clk,
  input  logic                         we,
  input  logic [AW-1:0]                waddr,
  input  logic [CW-1:0]                wcol,
  input  logic [COL_BITS-1:0]          wdata,
  input  logic                         re,
  input  logic [AW-1:0]                raddr,
  output logic [LANES*COL_BITS-1:0]    rdata
);
  logic [COL_BITS-1:0] mem [ROWS][LANES];

  always_ff @(posedge clk)
    if (we) mem[waddr][wcol] <= wdata;

  always_ff @(posedge clk)
    if (re)
      for (int c = 0; c < LANES; c++) rdata[c*COL_BITS +: COL_BITS] <= mem[raddr][c];
endmodule

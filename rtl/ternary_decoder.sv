// Ternary decoder: unpacks one weight-memory row of 1.6-bit packed weights
// into 2-bit codes for the matrix core.
//
// A row holds LANES weight columns stored one after another; each column of
// LANES weights is packed five weights per byte into BYTES_PER_COL bytes
// (52 for 256 weights, the last four digits being padding). Column c occupies
// enc[c*BYTES_PER_COL*8 +: BYTES_PER_COL*8], weight j of a column sits in byte
// j/5 as digit j%5. The output w[c][j] is the 2-bit code of weight (row j,
// column c). One trit5_decode per byte; combinational, no latency.
module ternary_decoder
  import tereffic_pkg::*;
#(
  parameter int LANES         = 256,
  parameter int BYTES_PER_COL = (LANES + 4) / 5
) (
  input  logic [LANES*BYTES_PER_COL*8-1:0] enc,
  output logic [LANES-1:0][LANES-1:0][1:0] w
);
  for (genvar c = 0; c < LANES; c++) begin : g_col
    logic [BYTES_PER_COL*5-1:0][1:0] dec;
    for (genvar b = 0; b < BYTES_PER_COL; b++) begin : g_byte
      trit5_decode u_dec (
        .q (enc[(c*BYTES_PER_COL + b)*8 +: 8]),
        .w (dec[b*5 +: 5])
      );
    end
    assign w[c] = dec[LANES-1:0];
  end
endmodule

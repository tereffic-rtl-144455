// 1/r look-up table of the RMSNorm unit.
//
// Indexed by the RMS value r (unsigned, 6 fractional bits in the norm unit),
// returns inv_r = round(2^16 / r), saturated to 2^OUT_W - 1 (also for r = 0
// and r = 1). The table replaces a divider by one multiplication. Its
// contents are computed by a loop at elaboration, so no data file is needed;
// the read is registered (one cycle, like a block RAM). The table size and
// number format are this design's choice.
module recip_lut #(
  parameter int IDX_W = 10,
  parameter int OUT_W = 16
) (
  input  logic             clk,
  input  logic [IDX_W-1:0] r,
  output logic [OUT_W-1:0] inv_r
);
  localparam int N = 1 << IDX_W;
  logic [OUT_W-1:0] rom [N];

  initial begin
    for (int i = 0; i < N; i++) begin
      longint q;
      q = (i == 0) ? (longint'(1) << OUT_W) : (((longint'(1) << 17) / i) + 1) / 2;
      rom[i] = (q > (longint'(1) << OUT_W) - 1) ? OUT_W'((longint'(1) << OUT_W) - 1) : OUT_W'(q);
    end
  end

  always_ff @(posedge clk) inv_r <= rom[r];
endmodule

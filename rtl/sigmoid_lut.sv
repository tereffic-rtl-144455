// Sigmoid look-up table for int8 Q3.4 activations.
//
// y = round(16 * 1 / (1 + exp(-x/16))), i.e. sigmoid in the same Q3.4
// format (0..16). The 256 entries are computed at elaboration: exp() is
// evaluated with real arithmetic in an initial loop, then stored as a ROM,
// the way a block-RAM table would be preloaded. Combinational read (the
// activation unit instantiates one per lane). A table realisation of the
// sigmoid follows the architecture; the format is this design's own.
module sigmoid_lut
  import tereffic_pkg::*;
(
  input  act_t x,
  output act_t y
);
  act_t rom [256];

  initial begin
    for (int i = 0; i < 256; i++) begin
      real xr, s;
      xr = real'($signed(8'(i))) / 16.0;
      s  = 16.0 / (1.0 + $exp(-xr));
      rom[i] = act_t'($rtoi(s + 0.5));
    end
  end

  assign y = rom[8'(x)];
endmodule

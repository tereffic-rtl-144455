// TMul: ternary multiply of one int8 activation by one 2-bit weight.
//
// Because a ternary product can only be x, -x or 0, the unit is a 3-way
// selector rather than a multiplier: code 2'b01 selects x, 2'b11 selects the
// precomputed negation nx, anything else gives 0. The negation is made once
// per activation element in the matrix core and shared by all dot-product
// units, as the architecture prescribes. Purely combinational.
module tmul
  import tereffic_pkg::*;
(
  input  act_t       x,   // activation
  input  act_t       nx,  // -x, precomputed
  input  logic [1:0] w,   // 2-bit ternary weight
  output act_t       p    // product
);
  always_comb begin
    unique case (w)
      W_POS:   p = x;
      W_NEG:   p = nx;
      default: p = '0;
    endcase
  end
endmodule

// Residual adder: y = clamp(a + b) per lane, int8, clamp to [-127, 127].
//
// Adds a matrix-core result tile to the residual stream held in the output
// buffer. The adder sits between the result buffer and the output buffer
// in the datapath; saturation is this design's choice. Combinational.
module residual_add
  import tereffic_pkg::*;
#(
  parameter int LANES = 256
) (
  input  act_t [LANES-1:0] a,
  input  act_t [LANES-1:0] b,
  output act_t [LANES-1:0] y
);
  always_comb
    for (int i = 0; i < LANES; i++) y[i] = sat8(int'(a[i]) + int'(b[i]));
endmodule

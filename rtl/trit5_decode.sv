// Decoder of one 8-bit code holding five ternary weights (1.6 bit/weight).
//
// Encoding: v = sum_{i=0..4} t_i * 3^i with digit t = 0 for -1, 1 for +1 and
// 2 for 0, and the stored byte q = ceil(v * 256 / 243). Decoding never
// divides: q*3 = q + (q << 1); bits [9:8] of that product are the most
// significant remaining digit and bits [7:0] become the next q. Five steps
// give t_4 first, down to t_0. Each digit is mapped to the 2-bit code
// (01 = +1, 11 = -1, 00 = 0). With this mapping the byte 8'b10001100 decodes
// to (-1, 0, 0, 1, 1) for weights 0..4. Purely combinational.
module trit5_decode
  import tereffic_pkg::*;
(
  input  logic [7:0]      q,
  output logic [4:0][1:0] w   // w[i] = 2-bit code of weight i
);
  always_comb begin
    logic [9:0] m;
    logic [7:0] r;
    r = q;
    w = '0;
    for (int i = 4; i >= 0; i--) begin
      m = {2'b00, r} + {1'b0, r, 1'b0};
      unique case (m[9:8])
        2'd0:    w[i] = W_NEG;
        2'd1:    w[i] = W_POS;
        default: w[i] = W_ZERO;
      endcase
      r = m[7:0];
    end
  end
endmodule

// Model-specific activation-function unit, LANES elements per cycle.
//
// Element-wise functions on int8 Q3.4 tiles, selected by fn:
//   FN_ADD a+b, FN_SUB a-b, FN_MUL a*b (the element-wise "Dot"),
//   FN_SIG sigmoid(a) by table, FN_ONEM 1-a, FN_COPY a.
// Every result is clamped to [-127, 127]. Products are rescaled by
// >>> ACT_FRAC (Q3.4 x Q3.4 -> Q3.4, truncating toward minus infinity).
// Together these build the recurrent gate of an HGRN layer and the gated
// linear unit (SiLU(g) = g * sigmoid(g), h = f*h + (1-f)*c, ...). Addition,
// subtraction, element-wise product and a table sigmoid follow the
// architecture; 1-a, copy and the number format are this design's own.
// Purely combinational.
module act_func
  import tereffic_pkg::*;
#(
  parameter int LANES = 256
) (
  input  act_fn_e          fn,
  input  act_t [LANES-1:0] a,
  input  act_t [LANES-1:0] b,
  output act_t [LANES-1:0] y
);
  localparam int ONE = 1 << ACT_FRAC;

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    act_t sig;
    sigmoid_lut u_sig (.x(a[i]), .y(sig));
    always_comb begin
      int ai, bi;
      ai = int'(a[i]);
      bi = int'(b[i]);
      unique case (fn)
        FN_ADD:  y[i] = sat8(ai + bi);
        FN_SUB:  y[i] = sat8(ai - bi);
        FN_MUL:  y[i] = sat8((ai * bi) >>> ACT_FRAC);
        FN_SIG:  y[i] = sig;
        FN_ONEM: y[i] = sat8(ONE - ai);
        default: y[i] = sat8(ai);
      endcase
    end
  end
endmodule

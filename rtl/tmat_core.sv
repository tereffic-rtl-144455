// TMat core: ternary vector x matrix multiply, one LANES x LANES tile per cycle.
//
// Each cycle it takes an activation tile X (LANES int8) and a decoded weight
// tile w[c][j] (column c, row j) and feeds LANES TDot units, one per output
// column. The negation -X is computed once here and broadcast to every TDot
// together with X, so the TMul units are plain selectors. Larger matrices
// are tiled: for each block of LANES output columns, the K input tiles are
// presented back to back with in_first on the first and in_last on the
// last; the TDots accumulate them.
//
// Timing: results appear LEVELS+1 cycles after the last tile of a dot
// product (LEVELS = log2(LANES)): a K x N tiled product issued from cycle 0
// completes in cycle K*N + LEVELS, e.g. 4*4 + 8 = 24 for a 1024 x 1024
// matrix with 256 lanes. out_valid pulses once per output tile; y holds it.
// X elements must be in [-127, 127] (asserted) so that -X is an int8.
module tmat_core
  import tereffic_pkg::*;
#(
  parameter int LANES = 256,
  parameter int ACC_W = 24
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic                          in_first,
  input  logic                          in_last,
  input  act_t [LANES-1:0]              x,
  input  logic [LANES-1:0][LANES-1:0][1:0] w,
  input  logic [SHIFT_W-1:0]            shift,
  output logic                          out_valid,
  output act_t [LANES-1:0]              y
);
  act_t [LANES-1:0] nx;
  always_comb
    for (int i = 0; i < LANES; i++) nx[i] = -x[i];

  logic [LANES-1:0] col_valid;
  for (genvar c = 0; c < LANES; c++) begin : g_tdot
    logic signed [ACC_W-1:0] acc_unused;
    tdot #(.LANES(LANES), .ACC_W(ACC_W)) u_tdot (
      .clk, .rst_n, .in_valid, .in_first, .in_last,
      .x, .nx, .w(w[c]), .shift,
      .out_valid(col_valid[c]), .out(y[c]), .acc(acc_unused)
    );
  end
  assign out_valid = col_valid[0];

  always_ff @(posedge clk)
    if (rst_n && in_valid)
      for (int i = 0; i < LANES; i++)
        assert (x[i] != -8'sd128) else $error("tmat_core: activation -128 on lane %0d", i);
endmodule

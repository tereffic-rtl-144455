// TDot: one column of the ternary matrix core.
//
// LANES TMul units multiply the activation tile by one weight column; a
// reduction tree adds the LANES products, registered once per tree level
// (log2(LANES) = 8 levels, i.e. 8 cycles for 256 lanes). The tree output is a
// partial sum of one input tile; an accumulator adds the partial sums of all
// input tiles of one dot product (in_first restarts it, in_last closes it).
//
// Timing: a tile presented in cycle t reaches the accumulator register in
// cycle t+LEVELS+1. With K input tiles per dot product and N dot products
// issued back to back from cycle 0, the last result is valid in cycle
// K*N + LEVELS (24 for K = N = 4 and 256 lanes). out_valid is a one-cycle
// pulse; out holds the requantised int8 value, clamp(acc >>> shift) to
// [-127, 127], and stays until the next result. shift must be stable while
// a result is held. The per-level registering and the 8-cycle reduction
// latency follow the architecture; the requantisation rule is this design's
// own.
module tdot
  import tereffic_pkg::*;
#(
  parameter int LANES = 256,
  parameter int ACC_W = 24
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic                   in_first,
  input  logic                   in_last,
  input  act_t [LANES-1:0]       x,
  input  act_t [LANES-1:0]       nx,
  input  logic [LANES-1:0][1:0]  w,
  input  logic [SHIFT_W-1:0]     shift,
  output logic                   out_valid,
  output act_t                   out,
  output logic signed [ACC_W-1:0] acc
);
  localparam int LEVELS = $clog2(LANES);
  localparam int SUM_W  = ACT_W + LEVELS;

  // level 0: products
  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    logic signed [SUM_W-1:0] v [LANES >> l];
    if (l == 0) begin : g_mul
      for (genvar i = 0; i < LANES; i++) begin : g_tmul
        act_t p;
        tmul u_tmul (.x(x[i]), .nx(nx[i]), .w(w[i]), .p(p));
        assign v[i] = SUM_W'(p);
      end
    end else begin : g_add
      for (genvar i = 0; i < (LANES >> l); i++) begin : g_node
        always_ff @(posedge clk) v[i] <= g_lvl[l-1].v[2*i] + g_lvl[l-1].v[2*i+1];
      end
    end
  end

  // control pipeline alongside the tree
  logic [LEVELS:0] vld, fst, lst;
  assign vld[0] = in_valid;
  assign fst[0] = in_first;
  assign lst[0] = in_last;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld[LEVELS:1] <= '0;
      fst[LEVELS:1] <= '0;
      lst[LEVELS:1] <= '0;
    end else begin
      vld[LEVELS:1] <= vld[LEVELS-1:0];
      fst[LEVELS:1] <= fst[LEVELS-1:0];
      lst[LEVELS:1] <= lst[LEVELS-1:0];
    end
  end

  // accumulator over input tiles
  logic signed [ACC_W-1:0] psum;
  assign psum = ACC_W'(g_lvl[LEVELS].v[0]);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= vld[LEVELS] & lst[LEVELS];
      if (vld[LEVELS]) acc <= fst[LEVELS] ? psum : acc + psum;
    end
  end

  assign out = sat8(32'(acc >>> shift));
endmodule

// RMSNorm unit: y = (x .* wn) / r with r = sqrt(mean(x^2) + eps).
//
// Two paths run side by side while the input tiles stream in: the squares
// of x are reduced and accumulated (mean-square path), and the products
// x .* wn are written into an internal tile buffer. When the last tile has
// arrived, the mean is formed by multiplying the sum by round(2^16/K) (K =
// number of tiles, a small constant table, so no divider), eps is added, a
// sequential square root gives r, and r indexes a 1/r table. The buffered
// products are then read back and multiplied by 1/r, one tile per cycle.
// Computing x .* wn in parallel with the RMS, buffering it, and using a 1/r
// table with a multiplication instead of a division follow the
// architecture; number formats, eps and the mean computation are this
// design's own.
//
// Formats: x is int8 Q3.4, wn int8 Q1.6, y int8 Q3.4 clamped to [-127, 127].
// The RMS r carries 6 fractional bits (r = isqrt(16 * mean square)), and
// 1/r = round(2^16 / r), so y = clamp((x*wn) * inv_r >>> 16).
//
// Interface: pulse start with len = K (1..MAX_TILES) while idle; then
// present K tiles with in_valid (x and wn together, any spacing). Output
// tiles leave with out_valid and out_idx = 0..K-1 in order, one per cycle,
// followed by a done pulse. Latency from the last input tile to the first
// output tile: about 2 + IN_W/2 + 4 cycles (10 square-root steps).
module rmsnorm
  import tereffic_pkg::*;
#(
  parameter int LANES     = 256,
  parameter int MAX_TILES = 32,
  parameter int EPS       = 1     // in units of 2^-8 of the mean square
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [5:0]            len,
  input  logic                  in_valid,
  input  act_t [LANES-1:0]      x,
  input  act_t [LANES-1:0]      wn,
  output logic                  out_valid,
  output logic [$clog2(MAX_TILES)-1:0] out_idx,
  output act_t [LANES-1:0]      y,
  output logic                  busy,
  output logic                  done
);
  localparam int LOG2L = $clog2(LANES);
  localparam int TW    = $clog2(MAX_TILES);
  localparam int SQ_W  = 20;

  typedef enum logic [2:0] {S_IDLE, S_ACC, S_MEAN, S_SQRT, S_LUT, S_OUT, S_DRAIN} state_e;
  state_e state;

  logic [5:0]       len_q;
  logic [TW-1:0]    cnt;
  logic [31:0]      sumsq;
  logic [LANES-1:0][15:0] pbuf [MAX_TILES];   // x .* wn products

  // round(2^16 / K) for K = 1..MAX_TILES
  function automatic logic [16:0] recip_k(input logic [5:0] k);
    return (k == 0) ? 17'd0 : 17'(((32'd1 << 17) / 32'(k) + 1) / 2);
  endfunction

  // squares of one tile, reduced
  logic [31:0] tile_sq;
  always_comb begin
    tile_sq = '0;
    for (int i = 0; i < LANES; i++) begin
      int xi;
      xi = int'(x[i]);
      tile_sq += 32'(xi * xi);
    end
  end

  logic [LANES-1:0][15:0] prod;
  always_comb
    for (int i = 0; i < LANES; i++) begin
      int xi, wi;
      xi = int'(x[i]);
      wi = int'(wn[i]);
      prod[i] = 16'(xi * wi);
    end

  // mean square, scaled for the root
  logic [63:0] mean_full;
  logic [SQ_W-1:0] radicand;
  always_comb begin
    mean_full = ((64'(sumsq) * 64'(recip_k(len_q))) >> (16 + LOG2L)) + 64'(EPS);
    radicand  = ((mean_full << 4) > 64'((1 << SQ_W) - 1)) ? SQ_W'((1 << SQ_W) - 1)
                                                         : SQ_W'(mean_full << 4);
  end

  logic sq_start, sq_busy, sq_done;
  logic [SQ_W/2-1:0] r;
  int_sqrt #(.IN_W(SQ_W)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .radicand, .busy(sq_busy), .done(sq_done), .root(r)
  );
  assign sq_start = (state == S_MEAN);

  logic [15:0] inv_r;
  recip_lut #(.IDX_W(SQ_W/2), .OUT_W(16)) u_lut (.clk, .r, .inv_r);

  // read-back pipeline: buffer read (1 cycle), multiply and clamp (1 cycle)
  logic             rd_vld;
  logic [TW-1:0]    rd_idx;
  logic [LANES-1:0][15:0] p_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; len_q <= '0; cnt <= '0; sumsq <= '0;
      rd_vld <= 1'b0; rd_idx <= '0; out_valid <= 1'b0; out_idx <= '0; done <= 1'b0;
    end else begin
      done      <= 1'b0;
      out_valid <= rd_vld;
      out_idx   <= rd_idx;
      rd_vld    <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          len_q <= len; cnt <= '0; sumsq <= '0; state <= S_ACC;
        end
        S_ACC: if (in_valid) begin
          sumsq <= sumsq + tile_sq;
          cnt   <= cnt + 1'b1;
          if (32'(cnt) == 32'(len_q) - 1) state <= S_MEAN;
        end
        S_MEAN: state <= S_SQRT;
        S_SQRT: if (sq_done) state <= S_LUT;
        S_LUT:  begin cnt <= '0; state <= S_OUT; end
        S_OUT: begin
          rd_vld <= 1'b1;
          rd_idx <= cnt;
          cnt    <= cnt + 1'b1;
          if (32'(cnt) == 32'(len_q) - 1) state <= S_DRAIN;
        end
        S_DRAIN: if (!rd_vld && out_valid) begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_ACC && in_valid) pbuf[cnt] <= prod;
    if (state == S_OUT) p_q <= pbuf[cnt];
  end

  always_ff @(posedge clk)
    for (int i = 0; i < LANES; i++)
      y[i] <= sat8(32'((longint'($signed(p_q[i])) * longint'(inv_r)) >>> 16));

  assign busy = (state != S_IDLE);
endmodule

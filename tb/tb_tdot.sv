// Self-checking test of one ternary dot-product unit (TDot) at 16 lanes.
// Streams K = 1..4 input tiles (first/last flags), with random activations
// in [-127, 127] and random 2-bit weight codes, and checks: the accumulated
// sum against a reference dot product, the requantised clamped output for
// random shifts, and that out_valid rises exactly LEVELS + 1 cycles after
// the last tile (adder-tree depth plus the accumulator register).
module tb_tdot;
  import tereffic_pkg::*;
  import tereffic_model_pkg::*;
  localparam int LANES = 16, LEVELS = 4, ACC_W = 24;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0, in_last = 0;
  act_t [LANES-1:0] x, nx;
  logic [LANES-1:0][1:0] w;
  logic [SHIFT_W-1:0] shift;
  logic out_valid;
  act_t out;
  logic signed [ACC_W-1:0] acc;
  tdot #(.LANES(LANES), .ACC_W(ACC_W)) dut (.clk, .rst_n, .in_valid, .in_first, .in_last,
    .x, .nx, .w, .shift, .out_valid, .out, .acc);
  always #5 clk = ~clk;

  initial begin
    x = '0; nx = '0; w = '0; shift = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      int K, sum, lat;
      K = 1 + int'($urandom_range(3));
      sum = 0;
      shift = SHIFT_W'($urandom_range(10));
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        in_valid = 1; in_first = (k == 0); in_last = (k == K - 1);
        for (int i = 0; i < LANES; i++) begin
          int xv, c;
          xv = (it == 0) ? 127 : int'($urandom_range(254)) - 127;
          c  = (it == 0) ? 1 : int'($urandom_range(3));
          x[i] = act_t'(xv); nx[i] = act_t'(-xv); w[i] = 2'(c);
          sum += xv * ((c == 1) ? 1 : (c == 3) ? -1 : 0);
        end
      end
      @(negedge clk); in_valid = 0; in_first = 0; in_last = 0;
      lat = 1;
      while (!out_valid && lat < 50) begin @(negedge clk); lat++; end
      checks += 3;
      if (lat != LEVELS + 1) begin
        failures++;
        if (failures < 6) $display("FAIL: latency %0d", lat);
      end
      if (int'(acc) != sum) begin
        failures++;
        if (failures < 6) $display("FAIL: acc %0d expected %0d", int'(acc), sum);
      end
      if (int'(out) != clamp(sum >>> shift)) begin
        failures++;
        if (failures < 6) $display("FAIL: out %0d expected %0d", int'(out), clamp(sum >>> shift));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

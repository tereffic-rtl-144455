// Test of the RMSNorm unit at 16 lanes: vectors of 1, 4 and 11 tiles with
// random data and norm weights, inputs presented with random gaps. Every
// output element is compared with the reference formula (integer square
// root by real arithmetic, 1/r rounded), and the output order and the done
// pulse are checked.
module tb_rmsnorm;
  import tereffic_pkg::*;
  localparam int LANES = 16, MAXT = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, in_valid, out_valid, busy, done;
  logic [5:0] len;
  logic [4:0] out_idx;
  act_t [LANES-1:0] x, wn, y;
  rmsnorm #(.LANES(LANES), .MAX_TILES(MAXT)) dut (.clk, .rst_n, .start, .len, .in_valid, .x, .wn,
                                                  .out_valid, .out_idx, .y, .busy, .done);
  int xv [MAXT][LANES], wv [MAXT][LANES], ev [MAXT][LANES];
  int nout = 0;

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (int'(out_idx) != nout) begin failures++; $display("FAIL: out_idx %0d expected %0d", out_idx, nout); end
    for (int i = 0; i < LANES; i++) begin
      checks++;
      if (int'(y[i]) != ev[nout][i]) begin
        failures++;
        if (failures < 10) $display("FAIL: tile %0d lane %0d: %0d vs %0d", nout, i, int'(y[i]), ev[nout][i]);
      end
    end
    nout++;
  end

  task automatic run(int K, int amp);
    longint sumsq, mean, rad, r, inv;
    sumsq = 0;
    for (int t = 0; t < K; t++)
      for (int i = 0; i < LANES; i++) begin
        xv[t][i] = $urandom_range(0, 2*amp) - amp;
        wv[t][i] = $urandom_range(0, 127) - 32;
        sumsq += xv[t][i] * xv[t][i];
      end
    mean = longint'(real'(sumsq) / real'(K * LANES) * 1.0) ;
    // same integer mean rule as the hardware: sum * round(2^16/K) >> (16 + log2 LANES)
    mean = ((sumsq * ((131072 / K + 1) / 2)) >> (16 + $clog2(LANES))) + 1;
    rad = mean * 16;
    if (rad > 1048575) rad = 1048575;
    r = longint'($floor($sqrt(real'(rad)) + 1e-9));
    inv = (r == 0) ? 65535 : longint'($floor(65536.0 / real'(r) + 0.5));
    if (inv > 65535) inv = 65535;
    for (int t = 0; t < K; t++)
      for (int i = 0; i < LANES; i++) begin
        longint v;
        v = (longint'(xv[t][i] * wv[t][i]) * inv) >>> 16;
        ev[t][i] = (v > 127) ? 127 : (v < -127) ? -127 : int'(v);
      end
    nout = 0;
    @(negedge clk);
    start = 1; len = 6'(K);
    @(negedge clk);
    start = 0;
    for (int t = 0; t < K; t++) begin
      while ($urandom_range(0, 2) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1;
      for (int i = 0; i < LANES; i++) begin x[i] = act_t'(xv[t][i]); wn[i] = act_t'(wv[t][i]); end
      @(negedge clk);
    end
    in_valid = 0;
    while (!done) @(negedge clk);
    checks++;
    if (nout != K) begin failures++; $display("FAIL: %0d tiles out of %0d", nout, K); end
  endtask

  initial begin
    start = 0; in_valid = 0; len = 0; x = '0; wn = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1, 40);
    run(4, 100);
    run(11, 8);
    run(4, 127);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Test of the TMat core at the full 256 lanes: a 1024 x 1024 ternary matrix
// (4 x 4 tiles) times a random int8 vector. Checks every output element
// against a directly computed dot product and checks the latency: issued
// from cycle 0, the last output tile must be valid in cycle 4*4 + 8 = 24.
module tb_tmat_core;
  import tereffic_pkg::*;
  localparam int LANES = 256, K = 4, N = 4, SHIFT = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_first, in_last, out_valid;
  act_t [LANES-1:0] x, y;
  logic [LANES-1:0][LANES-1:0][1:0] w;
  tmat_core #(.LANES(LANES)) dut (.clk, .rst_n, .in_valid, .in_first, .in_last, .x, .w,
                                  .shift(5'(SHIFT)), .out_valid, .y);

  int xv [K][LANES];
  int wv [N][K][LANES][LANES];   // [n][k][col][j]
  int cyc = 0, t0 = 0, nout = 0, last_cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [1:0] code(int v);
    return (v == 1) ? 2'b01 : (v == -1) ? 2'b11 : 2'b00;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    for (int c = 0; c < LANES; c++) begin
      longint acc;
      int e;
      acc = 0;
      for (int k = 0; k < K; k++)
        for (int j = 0; j < LANES; j++) acc += xv[k][j] * wv[nout][k][c][j];
      acc = acc >>> SHIFT;
      e = (acc > 127) ? 127 : (acc < -127) ? -127 : int'(acc);
      checks++;
      if (int'(y[c]) != e) begin
        failures++;
        if (failures < 10) $display("FAIL: tile %0d col %0d: %0d vs %0d", nout, c, int'(y[c]), e);
      end
    end
    nout++;
    last_cyc = cyc - t0;
  end

  initial begin
    for (int k = 0; k < K; k++) for (int j = 0; j < LANES; j++) xv[k][j] = $urandom_range(0, 254) - 127;
    for (int n = 0; n < N; n++) for (int k = 0; k < K; k++)
      for (int c = 0; c < LANES; c++) for (int j = 0; j < LANES; j++) wv[n][k][c][j] = $urandom_range(0, 2) - 1;
    in_valid = 0; in_first = 0; in_last = 0; x = '0; w = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < N; n++)
      for (int k = 0; k < K; k++) begin
        if (n == 0 && k == 0) t0 = cyc;
        in_valid = 1; in_first = (k == 0); in_last = (k == K - 1);
        for (int j = 0; j < LANES; j++) x[j] = act_t'(xv[k][j]);
        for (int c = 0; c < LANES; c++) for (int j = 0; j < LANES; j++) w[c][j] = code(wv[n][k][c][j]);
        @(negedge clk);
      end
    in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (nout != N) begin failures++; $display("FAIL: %0d output tiles", nout); end
    checks++;
    if (last_cyc != K*N + 8) begin failures++; $display("FAIL: last output in cycle %0d, expected %0d", last_cyc, K*N + 8); end
    $display("last output tile valid in cycle %0d", last_cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

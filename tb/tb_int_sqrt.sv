// Self-checking test of the sequential integer square root.
// Drives start with a radicand, waits for done and checks root against
// floor(sqrt(radicand)) computed by an integer search; covers the corner
// values 0, 1, 2^20-1, all perfect squares k^2 and k^2-1, and random
// radicands. Also checks that done arrives exactly IN_W/2 + 1 cycles after
// start, the latency the RMSNorm module relies on.
module tb_int_sqrt;
  localparam int IN_W = 20;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [IN_W-1:0] radicand;
  logic busy, done;
  logic [IN_W/2-1:0] root;
  int_sqrt #(.IN_W(IN_W)) dut (.clk, .rst_n, .start, .radicand, .busy, .done, .root);
  always #5 clk = ~clk;

  function automatic int isqrt_ref(int v);
    int r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  task automatic one(int v);
    int cyc = 0;
    @(negedge clk); radicand = IN_W'(v); start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 2;
    if (int'(root) != isqrt_ref(v)) begin
      failures++;
      if (failures < 6) $display("FAIL: sqrt(%0d) got %0d expected %0d", v, root, isqrt_ref(v));
    end
    if (cyc != IN_W / 2 + 1) begin
      failures++;
      if (failures < 6) $display("FAIL: latency %0d", cyc);
    end
  endtask

  initial begin
    radicand = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    one(0); one(1); one(2); one(3); one((1 << IN_W) - 1);
    for (int k = 2; k < 1024; k += 7) begin one(k * k); one(k * k - 1); end
    repeat (300) one(int'($urandom_range((1 << IN_W) - 1)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

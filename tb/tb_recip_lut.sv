// Self-checking test of the reciprocal look-up table: for every index r the
// registered output one cycle later must equal round(2^16 / r), saturated
// to 65535 (r = 0 and r = 1 both saturate).
module tb_recip_lut;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [9:0] r;
  logic [15:0] inv_r;
  recip_lut dut (.clk, .r, .inv_r);
  always #5 clk = ~clk;
  initial begin
    for (int i = 0; i < 1024; i++) begin
      int e;
      e = (i == 0) ? 65535 : (131072 / i + 1) / 2;
      if (e > 65535) e = 65535;
      @(negedge clk) r = 10'(i);
      @(negedge clk);
      checks++;
      if (int'(inv_r) != e) begin
        failures++;
        if (failures < 6) $display("FAIL: r=%0d got %0d expected %0d", i, inv_r, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

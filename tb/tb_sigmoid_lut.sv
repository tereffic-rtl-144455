// Exhaustive test of the sigmoid table over all 256 Q3.4 inputs against
// the reference round(16 / (1 + exp(-x/16))); also checks monotonicity and
// the fixed points sigmoid(0) = 0.5 (8) and the saturated ends (0 and 16).
module tb_sigmoid_lut;
  import tereffic_pkg::*;
  import tereffic_model_pkg::*;
  int checks = 0, failures = 0;
  act_t x, y;
  int prev;
  sigmoid_lut dut (.x, .y);
  initial begin
    prev = -1;
    for (int i = -128; i <= 127; i++) begin
      x = act_t'(i); #1;
      checks++;
      if (int'(y) != sigmoid_ref(i)) begin
        failures++;
        if (failures < 6) $display("FAIL: x=%0d got %0d expected %0d", i, int'(y), sigmoid_ref(i));
      end
      checks++;
      if (int'(y) < prev) failures++;
      prev = int'(y);
    end
    x = 0; #1; checks++; if (int'(y) != 8) failures++;
    x = act_t'(-128); #1; checks++; if (int'(y) != 0) failures++;
    x = act_t'(127); #1; checks++; if (int'(y) != 16) failures++;
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

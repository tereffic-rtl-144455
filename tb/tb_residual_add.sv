// Self-checking test of the residual adder with 16 lanes: saturating
// element-wise a + b on random vectors and on the +/-127 corners.
module tb_residual_add;
  import tereffic_pkg::*;
  import tereffic_model_pkg::*;
  localparam int LANES = 16;
  int checks = 0, failures = 0;
  act_t [LANES-1:0] a, b, y;
  residual_add #(.LANES(LANES)) dut (.a, .b, .y);
  initial begin
    for (int it = 0; it < 500; it++) begin
      for (int i = 0; i < LANES; i++) begin
        a[i] = act_t'((it < 2) ? ((it == 0) ? 127 : -127) : int'($urandom_range(254)) - 127);
        b[i] = act_t'((it < 2) ? ((it == 0) ? 100 : -100) : int'($urandom_range(254)) - 127);
      end
      #1;
      for (int i = 0; i < LANES; i++) begin
        checks++;
        if (int'(y[i]) != clamp(int'(a[i]) + int'(b[i]))) begin
          failures++;
          if (failures < 6) $display("FAIL: %0d + %0d got %0d", int'(a[i]), int'(b[i]), int'(y[i]));
        end
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

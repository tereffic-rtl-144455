// Exhaustive test of the ternary multiplier: every int8 x in [-127, 127]
// against all four 2-bit codes; expected product computed as x * weight.
module tb_tmul;
  import tereffic_pkg::*;
  int checks = 0, failures = 0;
  act_t x, nx, p;
  logic [1:0] w;
  tmul dut (.x, .nx, .w, .p);
  initial begin
    for (int xi = -127; xi <= 127; xi++)
      for (int c = 0; c < 4; c++) begin
        int wv;
        wv = (c == 1) ? 1 : (c == 3) ? -1 : 0;
        x = act_t'(xi); nx = act_t'(-xi); w = 2'(c);
        #1;
        checks++;
        if (int'(p) != xi * wv) begin
          failures++;
          if (failures < 5) $display("FAIL: x=%0d w=%b p=%0d", xi, w, p);
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

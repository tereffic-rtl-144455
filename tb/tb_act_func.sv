// Self-checking test of the element-wise activation unit with 16 lanes:
// every function (ADD, SUB, MUL, SIG, ONEM, COPY) on random Q3.4 vectors
// and on the saturating corners, against the reference arithmetic.
module tb_act_func;
  import tereffic_pkg::*;
  import tereffic_model_pkg::*;
  localparam int LANES = 16;
  int checks = 0, failures = 0;
  act_fn_e fn;
  act_t [LANES-1:0] a, b, y;
  act_func #(.LANES(LANES)) dut (.fn, .a, .b, .y);

  function automatic int ref_fn(act_fn_e f, int ai, int bi);
    case (f)
      FN_ADD:  return clamp(ai + bi);
      FN_SUB:  return clamp(ai - bi);
      FN_MUL:  return clamp((ai * bi) >>> 4);
      FN_SIG:  return sigmoid_ref(ai);
      FN_ONEM: return clamp(16 - ai);
      default: return clamp(ai);
    endcase
  endfunction

  initial begin
    for (int f = 0; f < 6; f++)
      for (int it = 0; it < 200; it++) begin
        fn = act_fn_e'(f);
        for (int i = 0; i < LANES; i++) begin
          if (it == 0) begin
            a[i] = act_t'((i & 1) ? 127 : -127);
            b[i] = act_t'((i & 2) ? 127 : -127);
          end else begin
            a[i] = act_t'(int'($urandom_range(254)) - 127);
            b[i] = act_t'(int'($urandom_range(254)) - 127);
          end
        end
        #1;
        for (int i = 0; i < LANES; i++) begin
          int e;
          e = ref_fn(fn, int'(a[i]), int'(b[i]));
          checks++;
          if (int'(y[i]) != e) begin
            failures++;
            if (failures < 6) $display("FAIL: fn=%0d a=%0d b=%0d got %0d expected %0d",
                                       f, int'(a[i]), int'(b[i]), int'(y[i]), e);
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

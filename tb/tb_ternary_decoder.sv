// Test of the 1.6-bit ternary decoder.
// 1) The example code 8'b10001100 must decode to (-1, 0, 0, 1, 1), i.e.
//    2-bit codes 11 00 00 01 01. 2) All 243 five-weight combinations are
//    encoded by the reference encoder and must decode back. 3) A 16-lane
//    row of random columns must decode to its weights.
module tb_ternary_decoder;
  import tereffic_pkg::*;
  import tereffic_model_pkg::*;
  localparam int LANES = 16, BPC = (LANES + 4) / 5;
  int checks = 0, failures = 0;

  logic [LANES*BPC*8-1:0] enc;
  logic [LANES-1:0][LANES-1:0][1:0] w;
  ternary_decoder #(.LANES(LANES)) dut (.enc, .w);

  function automatic int val(logic [1:0] c);
    return (c == 2'b01) ? 1 : (c == 2'b11) ? -1 : 0;
  endfunction

  initial begin
    int t [5];
    int wt [LANES][LANES];
    enc = '0;
    // printed example
    enc[7:0] = 8'b10001100;
    #1;
    checks++;
    if (!(w[0][0] == 2'b11 && w[0][1] == 2'b00 && w[0][2] == 2'b00 && w[0][3] == 2'b01 && w[0][4] == 2'b01)) begin
      failures++; $display("FAIL: example decodes to %b %b %b %b %b", w[0][0], w[0][1], w[0][2], w[0][3], w[0][4]);
    end
    // all combinations
    for (int v = 0; v < 243; v++) begin
      int r;
      r = v;
      for (int i = 0; i < 5; i++) begin t[i] = (r % 3) - 1; r /= 3; end
      enc[7:0] = enc5(t);
      #1;
      for (int i = 0; i < 5; i++) begin
        checks++;
        if (val(w[0][i]) != t[i]) begin
          failures++;
          if (failures < 10) $display("FAIL: combo %0d weight %0d: %0d vs %0d", v, i, val(w[0][i]), t[i]);
        end
      end
    end
    // a random row
    for (int c = 0; c < LANES; c++) begin
      for (int j = 0; j < LANES; j++) wt[c][j] = $urandom_range(0, 2) - 1;
      for (int b = 0; b < BPC; b++) begin
        for (int i = 0; i < 5; i++) t[i] = (b*5 + i < LANES) ? wt[c][b*5 + i] : 0;
        enc[(c*BPC + b)*8 +: 8] = enc5(t);
      end
    end
    #1;
    for (int c = 0; c < LANES; c++)
      for (int j = 0; j < LANES; j++) begin
        checks++;
        if (val(w[c][j]) != wt[c][j]) begin failures++; $display("FAIL: row c=%0d j=%0d", c, j); end
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

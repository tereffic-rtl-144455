// Self-checking test of the weight memory at 16 lanes, 4 bytes per column,
// 64 rows: column-wise writes of random data, then full-row reads checked
// against a shadow copy one cycle after re, including rewrites of single
// columns and rdata holding while re is low.
module tb_weight_mem;
  localparam int LANES = 16, BPC = 4, ROWS = 64, CB = 8 * BPC;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0, re = 0;
  logic [5:0] waddr, raddr;
  logic [3:0] wcol;
  logic [CB-1:0] wdata;
  logic [LANES*CB-1:0] rdata, held;
  logic [CB-1:0] shadow [ROWS][LANES];
  weight_mem #(.LANES(LANES), .BYTES_PER_COL(BPC), .ROWS(ROWS)) dut
    (.clk, .we, .waddr, .wcol, .wdata, .re, .raddr, .rdata);
  always #5 clk = ~clk;

  task automatic wr(int r, int c, logic [CB-1:0] d);
    @(negedge clk); we = 1; waddr = 6'(r); wcol = 4'(c); wdata = d; shadow[r][c] = d;
    @(negedge clk); we = 0;
  endtask

  task automatic rd_check(int r);
    @(negedge clk); re = 1; raddr = 6'(r);
    @(negedge clk); re = 0;
    for (int c = 0; c < LANES; c++) begin
      checks++;
      if (rdata[c*CB +: CB] != shadow[r][c]) begin
        failures++;
        if (failures < 6) $display("FAIL: row %0d col %0d got %h expected %h", r, c, rdata[c*CB +: CB], shadow[r][c]);
      end
    end
    held = rdata;
    @(negedge clk); raddr = 6'($urandom);
    @(negedge clk);
    checks++;
    if (rdata != held) failures++;
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < LANES; c++) wr(r, c, CB'($urandom));
    for (int r = 0; r < ROWS; r++) rd_check(r);
    repeat (100) begin
      int r;
      r = int'($urandom_range(ROWS - 1));
      wr(r, int'($urandom_range(LANES - 1)), CB'($urandom));
      rd_check(r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

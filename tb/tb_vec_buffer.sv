// Self-checking test of the vector buffer with two read ports: random
// writes and reads against a shadow array, checking the one-cycle read
// latency, that rdata holds when re is low, and write-then-read ordering.
module tb_vec_buffer;
  localparam int WIDTH = 64, DEPTH = 32, NRD = 2, AW = 5;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr;
  logic [WIDTH-1:0] wdata;
  logic [NRD-1:0] re;
  logic [NRD-1:0][AW-1:0] raddr;
  logic [NRD-1:0][WIDTH-1:0] rdata;
  logic [WIDTH-1:0] shadow [DEPTH];
  logic [NRD-1:0][WIDTH-1:0] expq, held;
  logic [NRD-1:0] rel;
  vec_buffer #(.WIDTH(WIDTH), .DEPTH(DEPTH), .NRD(NRD)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);
  always #5 clk = ~clk;
  initial begin
    re = '0; rel = '0; raddr = '0; waddr = '0; wdata = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = AW'(i); wdata = {$urandom, $urandom}; shadow[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      for (int p = 0; p < NRD; p++) begin
        if (rel[p]) begin
          checks++;
          if (rdata[p] != expq[p]) begin
            failures++;
            if (failures < 6) $display("FAIL: port %0d got %h expected %h", p, rdata[p], expq[p]);
          end
        end else if (it > 0) begin
          checks++;
          if (rdata[p] != held[p]) failures++;
        end
        held[p] = rdata[p];
      end
      re = NRD'($urandom);
      for (int p = 0; p < NRD; p++) begin
        raddr[p] = AW'($urandom_range(DEPTH - 1));
        expq[p]  = shadow[raddr[p]];
      end
      rel = re;
      we = 1'($urandom);
      waddr = AW'($urandom_range(DEPTH - 1));
      wdata = {$urandom, $urandom};
      // a read of the address written in the same cycle returns the old word
      if (we) shadow[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

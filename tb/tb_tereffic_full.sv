// Full-size test of one card at its default parameters (256 lanes,
// 2352-row weight memory, 52 bytes per 1.6-bit column).
//
// Loads one MatMul-free LM layer with the tile counts of the 370M model
// (hidden size 1024 = 4 tiles, feed-forward size 2816 = 11 tiles, i.e. 196
// weight tiles) into the weight memory through the column write port, the
// RMSNorm weights and the layer program, then runs one token and compares
// every output tile against the reference model. Also checks that each
// 4 x 4 matrix operation takes K*N + log2(256) + 3 = 27 cycles from decode
// to the next fetch (16 tile cycles plus the 8-level reduction tree).
`timescale 1ns/1ps
module tb_tereffic_full;
  import tereffic_pkg::*;
  import tereffic_model_pkg::*;

  localparam int LANES = 256, KD = 4, KF = 11, HS_TILES = 64;
  localparam int BPC   = (LANES + 4) / 5;
  localparam int ROWS  = 4*KD*KD + 3*KD*KF;
  localparam int NWT   = 3*KD + KF;
  localparam int SHIFT = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       prog_we = 0;
  logic [8:0] prog_addr = '0;
  op_t        prog_data = '0;
  logic       w_we = 0;
  logic [11:0] w_row = '0;
  logic [7:0] w_col = '0;
  logic [BPC*8-1:0] w_data = '0;
  logic       nw_we = 0;
  logic [9:0] nw_addr = '0;
  act_t [LANES-1:0] nw_data = '0;
  logic       start = 0;
  logic [3:0] batch = '0;
  logic       busy, done;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, out_last;
  act_t [LANES-1:0] in_data = '0, out_data;

  tereffic_top dut (
    .clk, .rst_n, .prog_we, .prog_addr, .prog_data, .w_we, .w_row, .w_col, .w_data,
    .nw_we, .nw_addr, .nw_data, .start, .batch, .busy, .done,
    .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .out_last
  );

  card_model #(LANES, HS_TILES) model;

  int cyc = 0, t0 = 0, kn = 0, tmat_ops = 0, out_idx = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n) begin
    if (int'(dut.state) == 2 && dut.op.op == OP_TMAT) begin t0 = cyc; kn = dut.op.len * dut.op.n_out; end
    if (int'(dut.state) == 5 && dut.tm_out_valid && dut.ocnt == dut.op.n_out - 1) begin
      checks++; tmat_ops++;
      if (cyc + 1 - t0 != kn + $clog2(LANES) + 3) begin
        failures++;
        $display("FAIL: TMAT took %0d cycles, expected %0d", cyc + 1 - t0, kn + $clog2(LANES) + 3);
      end
    end
    if (out_valid && out_ready) begin
      int bad = 0;
      checks++;
      for (int i = 0; i < LANES; i++)
        if (int'(out_data[i]) != model.sent[out_idx*LANES + i]) bad++;
      if (bad != 0) begin
        failures++;
        $display("FAIL: output tile %0d: %0d lanes differ", out_idx, bad);
      end
      out_idx++;
    end
  end

  initial begin
    op_t p [$];
    int x [KD][LANES];
    model = new(ROWS);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < LANES; c++)
        for (int j = 0; j < LANES; j++) model.wt[r][c][j] = $urandom_range(0, 2) - 1;
    for (int a = 0; a < NWT; a++)
      for (int i = 0; i < LANES; i++) model.nw[a][i] = $urandom_range(48, 80);
    p.push_back(mkop(OP_LOAD, FN_COPY, SP_OUT, 0, SP_OUT, 0, SP_OUT, 0, KD));
    layer_prog(p, KD, KF, 0, 0, 0, SHIFT, 1);
    p.push_back(mkop(OP_SEND, FN_COPY, SP_OUT, 0, SP_OUT, 0, SP_OUT, 0, KD));
    p.push_back(mkop(OP_END));
    model.prog = p;
    for (int t = 0; t < KD; t++)
      for (int i = 0; i < LANES; i++) begin
        x[t][i] = $urandom_range(0, 96) - 48;
        model.in_q.push_back(x[t][i]);
      end
    model.run(0);

    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < LANES; c++) begin
        logic [BPC*8-1:0] pc;
        for (int b = 0; b < BPC; b++) begin
          int t [5];
          for (int i = 0; i < 5; i++) t[i] = (b*5 + i < LANES) ? model.wt[r][c][b*5 + i] : 0;
          pc[b*8 +: 8] = enc5(t);
        end
        @(negedge clk); w_we = 1; w_row = 12'(r); w_col = 8'(c); w_data = pc;
      end
    @(negedge clk) w_we = 0;
    for (int a = 0; a < NWT; a++) begin
      @(negedge clk); nw_we = 1; nw_addr = 10'(a);
      for (int i = 0; i < LANES; i++) nw_data[i] = act_t'(model.nw[a][i]);
    end
    @(negedge clk) nw_we = 0;
    foreach (p[i]) begin
      @(negedge clk); prog_we = 1; prog_addr = 9'(i); prog_data = p[i];
    end
    @(negedge clk) prog_we = 0;

    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (int t = 0; t < KD; t++) begin
      in_valid = 1;
      for (int i = 0; i < LANES; i++) in_data[i] = act_t'(x[t][i]);
      while (!in_ready) @(negedge clk);
      @(negedge clk);
    end
    in_valid = 0;
    wait (done);
    repeat (3) @(negedge clk);
    $display("token done at cycle %0d, %0d matrix operations, %0d output tiles", cyc, tmat_ops, out_idx);
    checks++;
    if (out_idx != KD) begin failures++; $display("FAIL: %0d output tiles", out_idx); end
    checks++;
    if (tmat_ops == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

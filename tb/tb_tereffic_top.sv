// End-to-end test of two cards chained as a layer pipeline.
//
// Two tereffic_top instances at 16 lanes (hidden size 4 tiles = 64, feed-
// forward size 11 tiles = 176, the tile counts of the 370M model) each hold
// two MatMul-free LM layers; card A's output stream feeds card B's input
// stream, as over the inter-card link. Two sequences (batch 0 and 1) each
// run two tokens, so the recurrent state is cleared, reused and kept apart
// per batch. Every output tile of both cards is compared with the
// reference model. Also checked: the cycle count of every matrix operation
// (K*N tiles + 8-level-style reduction latency), and that each mechanism
// occurred: every opcode and activation function, multi-tile accumulation,
// output back-pressure, link stall and per-batch state.
`timescale 1ns/1ps
module tb_tereffic_top;
  import tereffic_pkg::*;
  import tereffic_model_pkg::*;

  localparam int LANES = 16, KD = 4, KF = 11, LAYERS = 2, WROWS = 512, HS_TILES = 64;
  localparam int BPC   = (LANES + 4) / 5;
  localparam int ROWS_PER_LAYER = 4*KD*KD + 3*KD*KF;
  localparam int NW_PER_LAYER   = 3*KD + KF;
  localparam int SHIFT = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // host-side signals of both cards
  logic       prog_we [2];
  logic [8:0] prog_addr [2];
  op_t        prog_data [2];
  logic       w_we [2];
  logic [8:0] w_row [2];
  logic [3:0] w_col [2];
  logic [BPC*8-1:0] w_data [2];
  logic       nw_we [2];
  logic [9:0] nw_addr [2];
  act_t [LANES-1:0] nw_data [2];
  logic       start [2];
  logic [3:0] batch [2];
  logic       busy [2], done [2];

  logic a_in_valid, a_in_ready, link_valid, link_ready, link_last, b_out_valid, b_out_ready, b_out_last;
  act_t [LANES-1:0] a_in_data, link_data, b_out_data;

  tereffic_top #(.LANES(LANES), .WROWS(WROWS), .HS_TILES(HS_TILES)) card_a (
    .clk, .rst_n,
    .prog_we(prog_we[0]), .prog_addr(prog_addr[0]), .prog_data(prog_data[0]),
    .w_we(w_we[0]), .w_row(w_row[0]), .w_col(w_col[0]), .w_data(w_data[0]),
    .nw_we(nw_we[0]), .nw_addr(nw_addr[0]), .nw_data(nw_data[0]),
    .start(start[0]), .batch(batch[0]), .busy(busy[0]), .done(done[0]),
    .in_valid(a_in_valid), .in_ready(a_in_ready), .in_data(a_in_data),
    .out_valid(link_valid), .out_ready(link_ready), .out_data(link_data), .out_last(link_last)
  );
  tereffic_top #(.LANES(LANES), .WROWS(WROWS), .HS_TILES(HS_TILES)) card_b (
    .clk, .rst_n,
    .prog_we(prog_we[1]), .prog_addr(prog_addr[1]), .prog_data(prog_data[1]),
    .w_we(w_we[1]), .w_row(w_row[1]), .w_col(w_col[1]), .w_data(w_data[1]),
    .nw_we(nw_we[1]), .nw_addr(nw_addr[1]), .nw_data(nw_data[1]),
    .start(start[1]), .batch(batch[1]), .busy(busy[1]), .done(done[1]),
    .in_valid(link_valid), .in_ready(link_ready), .in_data(link_data),
    .out_valid(b_out_valid), .out_ready(b_out_ready), .out_data(b_out_data), .out_last(b_out_last)
  );

  card_model #(LANES, HS_TILES) model [2];

  // ------------------------------------------------------------ loading
  task automatic load_weights(int c);
    for (int row = 0; row < LAYERS*ROWS_PER_LAYER; row++)
      for (int col = 0; col < LANES; col++) begin
        logic [BPC*8-1:0] packed_col;
        for (int b = 0; b < BPC; b++) begin
          int t [5];
          for (int i = 0; i < 5; i++) begin
            int j;
            j = b*5 + i;
            t[i] = (j < LANES) ? model[c].wt[row][col][j] : 0;
          end
          packed_col[b*8 +: 8] = enc5(t);
        end
        @(negedge clk);
        w_we[c] = 1; w_row[c] = 9'(row); w_col[c] = 4'(col); w_data[c] = packed_col;
      end
    @(negedge clk) w_we[c] = 0;
  endtask

  task automatic load_norm(int c);
    for (int a = 0; a < LAYERS*NW_PER_LAYER; a++) begin
      @(negedge clk);
      nw_we[c] = 1; nw_addr[c] = 10'(a);
      for (int i = 0; i < LANES; i++) nw_data[c][i] = act_t'(model[c].nw[a][i]);
    end
    @(negedge clk) nw_we[c] = 0;
  endtask

  task automatic load_prog(int c, bit first);
    op_t p [$];
    p.push_back(mkop(OP_LOAD, FN_COPY, SP_OUT, 0, SP_OUT, 0, SP_OUT, 0, KD));
    for (int l = 0; l < LAYERS; l++)
      layer_prog(p, KD, KF, l*ROWS_PER_LAYER, l*NW_PER_LAYER, l*KD, SHIFT, first);
    p.push_back(mkop(OP_SEND, FN_COPY, SP_OUT, 0, SP_OUT, 0, SP_OUT, 0, KD));
    p.push_back(mkop(OP_END));
    model[c].prog = p;
    foreach (p[i]) begin
      @(negedge clk);
      prog_we[c] = 1; prog_addr[c] = 9'(i); prog_data[c] = p[i];
    end
    @(negedge clk) prog_we[c] = 0;
  endtask

  // ------------------------------------------------------------ monitors
  int op_seen [8];
  int fn_seen [8];
  int tmat_multi = 0, out_stalls = 0, link_stalls = 0, hid_reuse = 0;
  int b_tiles = 0, a_tiles = 0;
  int tmat_t0 [2];
  int tmat_kn [2];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  for (genvar c = 0; c < 2; c++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (c == 0 && int'(card_a.state) == 2) begin
        op_seen[card_a.op.op]++;
        if (card_a.op.op == OP_ACT) fn_seen[card_a.op.fn]++;
        if (card_a.op.op == OP_TMAT) begin
          tmat_t0[0] = cyc; tmat_kn[0] = card_a.op.len * card_a.op.n_out;
          if (card_a.op.len > 1) tmat_multi++;
        end
      end
      if (c == 1 && int'(card_b.state) == 2) begin
        op_seen[card_b.op.op]++;
        if (card_b.op.op == OP_ACT) fn_seen[card_b.op.fn]++;
        if (card_b.op.op == OP_TMAT) begin
          tmat_t0[1] = cyc; tmat_kn[1] = card_b.op.len * card_b.op.n_out;
          if (card_b.op.len > 1) tmat_multi++;
        end
      end
      // a TMAT operation takes K*N issue cycles + read + 8 reduction levels
      // (log2 16 = 4 here) + accumulate + return to fetch
      if ((c == 0 && int'(card_a.state) == 5 && card_a.tm_out_valid && card_a.ocnt == card_a.op.n_out - 1) ||
          (c == 1 && int'(card_b.state) == 5 && card_b.tm_out_valid && card_b.ocnt == card_b.op.n_out - 1)) begin
        checks++;
        if (cyc + 1 - tmat_t0[c] != tmat_kn[c] + $clog2(LANES) + 3) begin
          failures++;
          $display("FAIL: card %0d TMAT took %0d cycles, expected %0d", c, cyc + 1 - tmat_t0[c], tmat_kn[c] + $clog2(LANES) + 3);
        end
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (b_out_valid && !b_out_ready) out_stalls++;
    if (link_valid && !link_ready) link_stalls++;
    if (card_a.hid_re && card_a.batch_q == 1) hid_reuse++;
  end

  // card A output (link) and card B output, compared in order
  int a_exp_idx = 0, b_exp_idx = 0;
  always @(posedge clk) if (rst_n) begin
    if (link_valid && link_ready) begin
      checks++;
      for (int i = 0; i < LANES; i++)
        if (int'(link_data[i]) != model[0].sent[a_exp_idx*LANES + i]) begin
          failures++;
          $display("FAIL: link tile %0d lane %0d: got %0d expected %0d", a_exp_idx, i, int'(link_data[i]), model[0].sent[a_exp_idx*LANES + i]);
          break;
        end
      a_exp_idx++;
    end
    if (b_out_valid && b_out_ready) begin
      checks++;
      for (int i = 0; i < LANES; i++)
        if (int'(b_out_data[i]) != model[1].sent[b_exp_idx*LANES + i]) begin
          failures++;
          $display("FAIL: output tile %0d lane %0d: got %0d expected %0d", b_exp_idx, i, int'(b_out_data[i]), model[1].sent[b_exp_idx*LANES + i]);
          break;
        end
      checks++;
      if (b_out_last != ((b_exp_idx % KD) == KD - 1)) begin
        failures++; $display("FAIL: out_last wrong on tile %0d", b_exp_idx);
      end
      b_exp_idx++;
    end
  end

  always @(negedge clk) b_out_ready <= ($urandom_range(0, 3) != 0);

  // ------------------------------------------------------------ stimulus
  task automatic run_token(int bt, int tok);
    int x [KD][LANES];
    for (int t = 0; t < KD; t++)
      for (int i = 0; i < LANES; i++) x[t][i] = $urandom_range(0, 96) - 48;
    // reference
    for (int t = 0; t < KD; t++) for (int i = 0; i < LANES; i++) model[0].in_q.push_back(x[t][i]);
    model[0].run(bt);
    for (int k = model[0].sent.size() - KD*LANES; k < model[0].sent.size(); k++) model[1].in_q.push_back(model[0].sent[k]);
    model[1].run(bt);
    // hardware
    @(negedge clk);
    start[0] = 1; start[1] = 1; batch[0] = 4'(bt); batch[1] = 4'(bt);
    @(negedge clk);
    start[0] = 0; start[1] = 0;
    for (int t = 0; t < KD; t++) begin
      a_in_valid = 1;
      for (int i = 0; i < LANES; i++) a_in_data[i] = act_t'(x[t][i]);
      while (!a_in_ready) @(negedge clk);   // ready as seen during this cycle
      @(negedge clk);                       // the clock edge in between takes the tile
    end
    a_in_valid = 0;
    fork
      wait (done[0]);
      wait (done[1]);
    join
    @(negedge clk);
    $display("token %0d batch %0d done at cycle %0d", tok, bt, cyc);
  endtask

  initial begin
    for (int c = 0; c < 2; c++) begin
      model[c] = new(LAYERS*ROWS_PER_LAYER);
      prog_we[c] = 0; w_we[c] = 0; nw_we[c] = 0; start[c] = 0; batch[c] = 0;
      prog_addr[c] = 0; prog_data[c] = '0; w_row[c] = 0; w_col[c] = 0; w_data[c] = '0;
      nw_addr[c] = 0; nw_data[c] = '0;
      for (int r = 0; r < LAYERS*ROWS_PER_LAYER; r++)
        for (int col = 0; col < LANES; col++)
          for (int j = 0; j < LANES; j++) model[c].wt[r][col][j] = $urandom_range(0, 2) - 1;
      for (int a = 0; a < LAYERS*NW_PER_LAYER; a++)
        for (int i = 0; i < LANES; i++) model[c].nw[a][i] = $urandom_range(48, 80);
    end
    a_in_valid = 0; a_in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 2; c++) begin
      load_weights(c);
      load_norm(c);
      load_prog(c, 1);
    end
    run_token(0, 0);
    run_token(1, 0);
    for (int c = 0; c < 2; c++) load_prog(c, 0);
    run_token(0, 1);
    run_token(1, 1);
    repeat (5) @(negedge clk);

    checks++;
    if (b_exp_idx != 4*KD || a_exp_idx != 4*KD) begin
      failures++; $display("FAIL: %0d/%0d tiles seen", a_exp_idx, b_exp_idx);
    end
    // every mechanism must have happened
    begin
      string names [7] = '{"END","LOAD","NORM","TMAT","ACT","RESID","SEND"};
      for (int o = 0; o < 7; o++) begin
        checks++;
        $display("opcode %s executed %0d times", names[o], op_seen[o]);
        if (op_seen[o] == 0) begin failures++; $display("FAIL: opcode %s never ran", names[o]); end
      end
    end
    for (int f = 0; f < 6; f++) begin
      checks++;
      $display("activation function %0d executed %0d times", f, fn_seen[f]);
      if (fn_seen[f] == 0) begin failures++; $display("FAIL: function %0d never ran", f); end
    end
    $display("multi-tile TMAT ops %0d, output stalls %0d, link stalls %0d, batch-1 state reads %0d",
             tmat_multi, out_stalls, link_stalls, hid_reuse);
    checks++; if (tmat_multi == 0) begin failures++; $display("FAIL: no multi-tile accumulation"); end
    checks++; if (out_stalls == 0) begin failures++; $display("FAIL: no output back-pressure"); end
    checks++; if (hid_reuse == 0)  begin failures++; $display("FAIL: batch 1 state never read"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

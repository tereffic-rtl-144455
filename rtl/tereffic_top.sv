// One accelerator card of the fully on-chip ternary LLM inference design.
//
// Datapath. Packed ternary weights live in the weight memory, one LANES x
// LANES tile per row, and are decoded from 1.6 to 2 bits per weight on their
// way into the matrix core. The BitLinear path is: RMSNorm unit -> activation
// buffer -> ternary matrix core (TMat). Matrix-core results go to a scratch
// buffer, from which the element-wise activation unit (sigmoid table, add,
// subtract, product) computes gates and the recurrent state, kept per batch
// sequence in the hidden-state buffer; the residual adder adds results into
// the output buffer, which holds the residual stream of the token. The
// output buffer is loaded from the input stream (the token, or the previous
// card's activations) and sent on the output stream (to the next card, or as
// the result). Every vector moves as tiles of LANES int8 values, one tile
// per cycle.
//
// Control. The datapath is sequenced by a small program of op_t records
// written by the host (see tereffic_pkg). Per token the host pulses start
// with the batch (sequence) index; the controller executes operations from
// address 0 to OP_END and pulses done. Each operation streams its tiles one
// per cycle and drains before the next one starts:
//   OP_LOAD  len tiles from in_* (valid/ready) into output buffer [d..]
//   OP_NORM  RMSNorm of len tiles of space sp_a [a..] with norm weights
//            [wbase..] into the activation buffer
//   OP_TMAT  len input tiles x n_out output tiles, weight rows wbase + n*len
//            + k, results clamp(acc >>> shift) into scratch [d..]
//   OP_ACT   d[t] = fn(a[t], b[t]) over len tiles, any spaces (a and b may
//            not both be the hidden or both the output buffer)
//   OP_RESID output [d+t] += scratch [a+t]
//   OP_SEND  len tiles of output buffer [a..] on out_* (valid/ready, out_last
//            on the last tile)
// Hidden-state addresses are offset by batch * HS_TILES, so each of up to
// HS_BATCHES interleaved sequences keeps its own recurrent state.
//
// Timing: a TMAT operation of K x N tiles occupies the matrix core for K*N
// cycles and completes LEVELS+3 cycles later (read, decode into the core,
// 8-level reduction, accumulate). The datapath arrangement follows the
// architecture; the program-driven controller, operation set, one-op-at-a-
// time sequencing, buffer depths and host load ports are this design's own.
module tereffic_top
  import tereffic_pkg::*;
#(
  parameter int LANES         = 256,
  parameter int BYTES_PER_COL = (LANES + 4) / 5,
  parameter int WROWS         = 2352,
  parameter int PROG_DEPTH    = 512,
  parameter int MAX_TILES     = 32,
  parameter int SCR_TILES     = 128,
  parameter int OUT_TILES     = 32,
  parameter int HS_BATCHES    = 16,
  parameter int HS_TILES      = 64,
  parameter int NW_TILES      = 1024,
  parameter int ACC_W         = 24,
  localparam int COL_BITS     = 8 * BYTES_PER_COL,
  localparam int WAW          = $clog2(WROWS),
  localparam int PAW          = $clog2(PROG_DEPTH),
  localparam int BW           = $clog2(HS_BATCHES),
  localparam int HAW          = $clog2(HS_BATCHES * HS_TILES),
  localparam int NAW          = $clog2(NW_TILES)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // host load ports
  input  logic                   prog_we,
  input  logic [PAW-1:0]         prog_addr,
  input  op_t                    prog_data,
  input  logic                   w_we,
  input  logic [WAW-1:0]         w_row,
  input  logic [$clog2(LANES)-1:0] w_col,
  input  logic [COL_BITS-1:0]    w_data,
  input  logic                   nw_we,
  input  logic [NAW-1:0]         nw_addr,
  input  act_t [LANES-1:0]       nw_data,
  // run control
  input  logic                   start,
  input  logic [BW-1:0]          batch,
  output logic                   busy,
  output logic                   done,
  // token input / link receive
  input  logic                   in_valid,
  output logic                   in_ready,
  input  act_t [LANES-1:0]       in_data,
  // token output / link transmit
  output logic                   out_valid,
  input  logic                   out_ready,
  output act_t [LANES-1:0]       out_data,
  output logic                   out_last
);
  localparam int LEVELS = $clog2(LANES);
  localparam int VW     = LANES * ACT_W;
  localparam int TAW    = $clog2(MAX_TILES);
  localparam int SAW    = $clog2(SCR_TILES);
  localparam int OAW    = $clog2(OUT_TILES);

  // ---------------------------------------------------------------- program
  op_t prog [PROG_DEPTH];
  always_ff @(posedge clk)
    if (prog_we) prog[prog_addr] <= prog_data;

  typedef enum logic [3:0] {
    S_IDLE, S_FETCH, S_DECODE, S_ISSUE, S_NORM_WAIT, S_TMAT_WAIT, S_DRAIN,
    S_LOAD, S_SEND_RD, S_SEND_WAIT
  } state_e;
  state_e state;

  op_t            op;
  logic [PAW-1:0] pc;
  logic [BW-1:0]  batch_q;
  logic [5:0]     cnt;      // tile counter within the operation
  logic [5:0]     kk, nn;   // TMAT input/output tile counters
  logic [WAW-1:0] wrow;     // TMAT weight row
  logic [5:0]     ocnt;     // TMAT output tiles written

  function automatic logic [HAW-1:0] hid_addr(input logic [BW-1:0] b, input logic [9:0] a);
    return HAW'(b) * HAW'(HS_TILES) + HAW'(a);
  endfunction

  // ---------------------------------------------------------------- buffers
  // activation buffer (norm -> matrix core)
  logic              act_we, act_re;
  logic [TAW-1:0]    act_waddr, act_raddr;
  logic [VW-1:0]     act_rdata;
  act_t [LANES-1:0]  norm_y;
  vec_buffer #(.WIDTH(VW), .DEPTH(MAX_TILES), .NRD(1)) u_act_buf (
    .clk, .we(act_we), .waddr(act_waddr), .wdata(norm_y),
    .re(act_re), .raddr(act_raddr), .rdata(act_rdata)
  );

  // scratch / matrix-core result buffer, two read ports
  logic              scr_we;
  logic [SAW-1:0]    scr_waddr;
  logic [VW-1:0]     scr_wdata;
  logic [1:0]        scr_re;
  logic [1:0][SAW-1:0] scr_raddr;
  logic [1:0][VW-1:0]  scr_rdata;
  vec_buffer #(.WIDTH(VW), .DEPTH(SCR_TILES), .NRD(2)) u_scr_buf (
    .clk, .we(scr_we), .waddr(scr_waddr), .wdata(scr_wdata),
    .re(scr_re), .raddr(scr_raddr), .rdata(scr_rdata)
  );

  // output buffer (residual stream)
  logic              out_we, out_re;
  logic [OAW-1:0]    out_waddr, out_raddr;
  logic [VW-1:0]     out_wdata, out_rdata;
  vec_buffer #(.WIDTH(VW), .DEPTH(OUT_TILES), .NRD(1)) u_out_buf (
    .clk, .we(out_we), .waddr(out_waddr), .wdata(out_wdata),
    .re(out_re), .raddr(out_raddr), .rdata(out_rdata)
  );

  // hidden-state buffer
  logic              hid_we, hid_re;
  logic [HAW-1:0]    hid_waddr, hid_raddr;
  logic [VW-1:0]     hid_wdata, hid_rdata;
  vec_buffer #(.WIDTH(VW), .DEPTH(HS_BATCHES * HS_TILES), .NRD(1)) u_hid_buf (
    .clk, .we(hid_we), .waddr(hid_waddr), .wdata(hid_wdata),
    .re(hid_re), .raddr(hid_raddr), .rdata(hid_rdata)
  );

  // norm-weight store
  logic              nw_re;
  logic [NAW-1:0]    nw_raddr;
  logic [VW-1:0]     nw_rdata;
  vec_buffer #(.WIDTH(VW), .DEPTH(NW_TILES), .NRD(1)) u_nw_buf (
    .clk, .we(nw_we), .waddr(nw_addr), .wdata(nw_data),
    .re(nw_re), .raddr(nw_raddr), .rdata(nw_rdata)
  );

  // weight memory and decoder
  logic                       w_re;
  logic [LANES*COL_BITS-1:0]  w_rdata;
  logic [LANES-1:0][LANES-1:0][1:0] w_dec;
  weight_mem #(.LANES(LANES), .BYTES_PER_COL(BYTES_PER_COL), .ROWS(WROWS)) u_wmem (
    .clk, .we(w_we), .waddr(w_row), .wcol(w_col), .wdata(w_data),
    .re(w_re), .raddr(wrow), .rdata(w_rdata)
  );
  ternary_decoder #(.LANES(LANES), .BYTES_PER_COL(BYTES_PER_COL)) u_dec (
    .enc(w_rdata), .w(w_dec)
  );

  // ---------------------------------------------------------------- units
  logic              norm_start, norm_in_valid, norm_out_valid, norm_busy, norm_done;
  logic [TAW-1:0]    norm_out_idx;
  act_t [LANES-1:0]  opnd_a, opnd_b;
  rmsnorm #(.LANES(LANES), .MAX_TILES(MAX_TILES)) u_norm (
    .clk, .rst_n, .start(norm_start), .len(op.len), .in_valid(norm_in_valid),
    .x(opnd_a), .wn(nw_rdata), .out_valid(norm_out_valid), .out_idx(norm_out_idx),
    .y(norm_y), .busy(norm_busy), .done(norm_done)
  );

  logic              tm_valid, tm_first, tm_last, tm_out_valid;
  act_t [LANES-1:0]  tm_y;
  tmat_core #(.LANES(LANES), .ACC_W(ACC_W)) u_tmat (
    .clk, .rst_n, .in_valid(tm_valid), .in_first(tm_first), .in_last(tm_last),
    .x(act_rdata), .w(w_dec), .shift(op.shift), .out_valid(tm_out_valid), .y(tm_y)
  );

  act_t [LANES-1:0]  af_y, ra_y;
  act_func #(.LANES(LANES)) u_act (.fn(op.fn), .a(opnd_a), .b(opnd_b), .y(af_y));
  residual_add #(.LANES(LANES)) u_res (.a(opnd_a), .b(opnd_b), .y(ra_y));

  // ---------------------------------------------------------------- issue
  logic issuing;           // a tile is issued this cycle
  logic last_issue;        // ... and it is the last one of the operation
  logic rd_v;              // operands of the tile issued last cycle are valid now
  logic [5:0] rd_t;        // its tile index
  logic tm_first_q, tm_last_q;

  assign issuing    = (state == S_ISSUE);
  assign last_issue = issuing && ((op.op == OP_TMAT) ? (kk == op.len - 1 && nn == op.n_out - 1)
                                                     : (cnt == op.len - 1));

  logic [9:0] a_addr, b_addr, d_addr;
  assign a_addr = op.a + 10'(cnt);
  assign b_addr = op.b + 10'(cnt);
  assign d_addr = op.d + 10'(cnt);

  // read-port requests
  always_comb begin
    scr_re    = '0;
    scr_raddr = '0;
    hid_re    = 1'b0;
    hid_raddr = hid_addr(batch_q, a_addr);
    out_re    = 1'b0;
    out_raddr = OAW'(a_addr);
    nw_re     = 1'b0;
    nw_raddr  = NAW'(op.wbase + 16'(cnt));
    act_re    = 1'b0;
    act_raddr = TAW'(kk);
    w_re      = 1'b0;
    if (issuing) begin
      unique case (op.op)
        OP_NORM, OP_ACT: begin
          if (op.op == OP_NORM) nw_re = 1'b1;
          unique case (op.sp_a)
            SP_SCR:  begin scr_re[0] = 1'b1; scr_raddr[0] = SAW'(a_addr); end
            SP_HID:  begin hid_re = 1'b1; hid_raddr = hid_addr(batch_q, a_addr); end
            default: begin out_re = 1'b1; out_raddr = OAW'(a_addr); end
          endcase
          if (op.op == OP_ACT)
            unique case (op.sp_b)
              SP_SCR:  begin scr_re[1] = 1'b1; scr_raddr[1] = SAW'(b_addr); end
              SP_HID:  begin hid_re = 1'b1; hid_raddr = hid_addr(batch_q, b_addr); end
              default: begin out_re = 1'b1; out_raddr = OAW'(b_addr); end
            endcase
        end
        OP_RESID: begin
          scr_re[0] = 1'b1; scr_raddr[0] = SAW'(a_addr);
          out_re    = 1'b1; out_raddr    = OAW'(d_addr);
        end
        OP_TMAT: begin act_re = 1'b1; w_re = 1'b1; end
        default: ;
      endcase
    end
    if (state == S_SEND_RD) begin out_re = 1'b1; out_raddr = OAW'(a_addr); end
  end

  // operand selection one cycle after the read
  always_comb begin
    unique case (op.sp_a)
      SP_SCR:  opnd_a = scr_rdata[0];
      SP_HID:  opnd_a = hid_rdata;
      default: opnd_a = out_rdata;
    endcase
    unique case (op.sp_b)
      SP_SCR:  opnd_b = scr_rdata[1];
      SP_HID:  opnd_b = hid_rdata;
      default: opnd_b = out_rdata;
    endcase
    if (op.op == OP_RESID) begin
      opnd_a = scr_rdata[0];
      opnd_b = out_rdata;
    end
  end

  assign norm_start    = (state == S_DECODE) && (op.op == OP_NORM);
  assign norm_in_valid = rd_v && (op.op == OP_NORM);
  assign tm_valid      = rd_v && (op.op == OP_TMAT);
  assign tm_first      = tm_first_q;
  assign tm_last       = tm_last_q;

  // ---------------------------------------------------------------- writes
  logic [9:0] wb_addr;
  assign wb_addr = op.d + 10'(rd_t);

  always_comb begin
    act_we    = norm_out_valid;
    act_waddr = norm_out_idx;

    scr_we    = 1'b0;
    scr_waddr = SAW'(op.d + 10'(ocnt));
    scr_wdata = tm_y;
    out_we    = 1'b0;
    out_waddr = OAW'(wb_addr);
    out_wdata = af_y;
    hid_we    = 1'b0;
    hid_waddr = hid_addr(batch_q, wb_addr);
    hid_wdata = af_y;

    if (tm_out_valid) scr_we = 1'b1;
    if (rd_v && op.op == OP_ACT)
      unique case (op.sp_d)
        SP_SCR:  begin scr_we = 1'b1; scr_waddr = SAW'(wb_addr); scr_wdata = af_y; end
        SP_HID:  hid_we = 1'b1;
        default: out_we = 1'b1;
      endcase
    if (rd_v && op.op == OP_RESID) begin out_we = 1'b1; out_wdata = ra_y; end
    if (state == S_LOAD && in_valid) begin
      out_we = 1'b1; out_waddr = OAW'(d_addr); out_wdata = in_data;
    end
  end

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_SEND_WAIT);
  assign out_data  = out_rdata;
  assign out_last  = (state == S_SEND_WAIT) && (cnt == op.len - 1);
  assign busy      = (state != S_IDLE);

  // ---------------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; op <= '0; pc <= '0; batch_q <= '0; cnt <= '0;
      kk <= '0; nn <= '0; wrow <= '0; ocnt <= '0; done <= 1'b0;
      rd_v <= 1'b0; rd_t <= '0; tm_first_q <= 1'b0; tm_last_q <= 1'b0;
    end else begin
      done       <= 1'b0;
      rd_v       <= issuing;
      rd_t       <= cnt;
      tm_first_q <= (kk == 0);
      tm_last_q  <= (kk == op.len - 1);
      if (tm_out_valid) ocnt <= ocnt + 1'b1;

      unique case (state)
        S_IDLE: if (start) begin
          pc <= '0; batch_q <= batch; state <= S_FETCH;
        end
        S_FETCH: begin
          op    <= prog[pc];
          pc    <= pc + 1'b1;
          state <= S_DECODE;
        end
        S_DECODE: begin
          cnt <= '0; kk <= '0; nn <= '0; ocnt <= '0;
          wrow <= WAW'(op.wbase);
          unique case (op.op)
            OP_END:  begin done <= 1'b1; state <= S_IDLE; end
            OP_LOAD: state <= S_LOAD;
            OP_SEND: state <= S_SEND_RD;
            default: state <= S_ISSUE;
          endcase
        end
        S_ISSUE: begin
          cnt <= cnt + 1'b1;
          if (op.op == OP_TMAT) begin
            wrow <= wrow + 1'b1;
            if (kk == op.len - 1) begin kk <= '0; nn <= nn + 1'b1; end
            else kk <= kk + 1'b1;
          end
          if (last_issue)
            unique case (op.op)
              OP_NORM: state <= S_NORM_WAIT;
              OP_TMAT: state <= S_TMAT_WAIT;
              default: state <= S_DRAIN;
            endcase
        end
        S_NORM_WAIT: if (norm_done) state <= S_FETCH;
        S_TMAT_WAIT: if (tm_out_valid && ocnt == op.n_out - 1) state <= S_FETCH;
        S_DRAIN:     state <= S_FETCH;
        S_LOAD: if (in_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == op.len - 1) state <= S_FETCH;
        end
        S_SEND_RD:   state <= S_SEND_WAIT;
        S_SEND_WAIT: if (out_ready) begin
          cnt <= cnt + 1'b1;
          state <= (cnt == op.len - 1) ? S_FETCH : S_SEND_RD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- checks
  // operands a and b may not need the same single-ported buffer
  assert property (@(posedge clk) disable iff (!rst_n)
    (issuing && op.op == OP_ACT) |-> !(op.sp_a == op.sp_b && op.sp_a != SP_SCR))
    else $error("tereffic_top: OP_ACT operands share a single-read-port buffer");
  // the stream handshake: data may only be offered in a send operation
  assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_data)))
    else $error("tereffic_top: out_data changed while stalled");
endmodule

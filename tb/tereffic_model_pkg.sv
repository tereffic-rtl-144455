// Reference model of the accelerator card, used by the testbenches.
//
// card_model #(LANES) holds integer copies of every buffer and interprets
// the same op_t programs as the hardware, with its own arithmetic: weights
// are kept as plain ternary integers (never packed), the square root and
// sigmoid use real arithmetic, and sums are formed directly. It also
// provides the 1.6-bit encoder (q = ceil(v * 256 / 243), v = sum t_i 3^i,
// digit 0 = -1, 1 = +1, 2 = 0) used to load the weight memory.
package tereffic_model_pkg;
  import tereffic_pkg::*;

  function automatic int clamp(int v);
    return (v > 127) ? 127 : (v < -127) ? -127 : v;
  endfunction

  function automatic logic [7:0] enc5(input int t [5]);
    int v, d;
    v = 0;
    for (int i = 4; i >= 0; i--) begin
      d = (t[i] == -1) ? 0 : (t[i] == 1) ? 1 : 2;
      v = v * 3 + d;
    end
    return 8'((v * 256 + 242) / 243);
  endfunction

  function automatic int sigmoid_ref(int a);
    real s;
    s = 16.0 / (1.0 + $exp(-real'(a) / 16.0));
    return $rtoi(s + 0.5);
  endfunction

  function automatic op_t mkop(opcode_e opc, act_fn_e fn = FN_COPY, space_e sa = SP_SCR,
                               int a = 0, space_e sb = SP_SCR, int b = 0, space_e sd = SP_SCR,
                               int d = 0, int len = 1, int n_out = 1, int wbase = 0, int shift = 0);
    op_t o;
    o = '0;
    o.op = opc; o.fn = fn; o.sp_a = sa; o.sp_b = sb; o.sp_d = sd;
    o.a = 10'(a); o.b = 10'(b); o.d = 10'(d);
    o.len = 6'(len); o.n_out = 6'(n_out); o.wbase = 16'(wbase); o.shift = SHIFT_W'(shift);
    return o;
  endfunction

  // Program of one MatMul-free LM layer (HGRN token mixer + GLU channel
  // mixer, each wrapped in a residual), for a hidden size of KD tiles and a
  // feed-forward size of KF tiles. Weight rows from wb, norm weights from
  // nwb, recurrent state at hidden tile hb. With clear_h the recurrent state
  // is zeroed first (first token of a sequence).
  localparam int S_I = 0, S_F = 16, S_G = 32, S_T = 48, S_O = 64, S_U = 80, S_Z = 96;
  function automatic void layer_prog(ref op_t p [$], input int KD, KF, wb, nwb, hb, sh, bit clear_h);
    int r;
    r = wb;
    if (clear_h) begin
      p.push_back(mkop(OP_ACT, FN_SUB, SP_SCR, S_Z, SP_SCR, S_Z, SP_SCR, S_Z, 1));
      for (int t = 0; t < KD; t++)
        p.push_back(mkop(OP_ACT, FN_COPY, SP_SCR, S_Z, SP_SCR, 0, SP_HID, hb + t, 1));
    end
    p.push_back(mkop(OP_NORM, FN_COPY, SP_OUT, 0, SP_SCR, 0, SP_SCR, 0, KD, 1, nwb));
    p.push_back(mkop(OP_TMAT, FN_COPY, SP_SCR, 0, SP_SCR, 0, SP_SCR, S_I, KD, KD, r, sh)); r += KD*KD;
    p.push_back(mkop(OP_TMAT, FN_COPY, SP_SCR, 0, SP_SCR, 0, SP_SCR, S_F, KD, KD, r, sh)); r += KD*KD;
    p.push_back(mkop(OP_TMAT, FN_COPY, SP_SCR, 0, SP_SCR, 0, SP_SCR, S_G, KD, KD, r, sh)); r += KD*KD;
    p.push_back(mkop(OP_ACT, FN_SIG,  SP_SCR, S_F, SP_SCR, 0,   SP_SCR, S_F, KD));
    p.push_back(mkop(OP_ACT, FN_SIG,  SP_SCR, S_I, SP_SCR, 0,   SP_SCR, S_T, KD));
    p.push_back(mkop(OP_ACT, FN_MUL,  SP_SCR, S_I, SP_SCR, S_T, SP_SCR, S_I, KD));
    p.push_back(mkop(OP_ACT, FN_ONEM, SP_SCR, S_F, SP_SCR, 0,   SP_SCR, S_T, KD));
    p.push_back(mkop(OP_ACT, FN_MUL,  SP_SCR, S_I, SP_SCR, S_T, SP_SCR, S_I, KD));
    p.push_back(mkop(OP_ACT, FN_MUL,  SP_SCR, S_F, SP_HID, hb,  SP_SCR, S_T, KD));
    p.push_back(mkop(OP_ACT, FN_ADD,  SP_SCR, S_T, SP_SCR, S_I, SP_HID, hb,  KD));
    p.push_back(mkop(OP_ACT, FN_SIG,  SP_SCR, S_G, SP_SCR, 0,   SP_SCR, S_T, KD));
    p.push_back(mkop(OP_ACT, FN_MUL,  SP_SCR, S_G, SP_SCR, S_T, SP_SCR, S_G, KD));
    p.push_back(mkop(OP_ACT, FN_MUL,  SP_SCR, S_G, SP_HID, hb,  SP_SCR, S_O, KD));
    p.push_back(mkop(OP_NORM, FN_COPY, SP_SCR, S_O, SP_SCR, 0, SP_SCR, 0, KD, 1, nwb + KD));
    p.push_back(mkop(OP_TMAT, FN_COPY, SP_SCR, 0, SP_SCR, 0, SP_SCR, S_T, KD, KD, r, sh)); r += KD*KD;
    p.push_back(mkop(OP_RESID, FN_ADD, SP_SCR, S_T, SP_OUT, 0, SP_OUT, 0, KD));
    p.push_back(mkop(OP_NORM, FN_COPY, SP_OUT, 0, SP_SCR, 0, SP_SCR, 0, KD, 1, nwb + 2*KD));
    p.push_back(mkop(OP_TMAT, FN_COPY, SP_SCR, 0, SP_SCR, 0, SP_SCR, S_G, KD, KF, r, sh)); r += KD*KF;
    p.push_back(mkop(OP_TMAT, FN_COPY, SP_SCR, 0, SP_SCR, 0, SP_SCR, S_U, KD, KF, r, sh)); r += KD*KF;
    p.push_back(mkop(OP_ACT, FN_SIG,  SP_SCR, S_G, SP_SCR, 0,   SP_SCR, S_T, KF));
    p.push_back(mkop(OP_ACT, FN_MUL,  SP_SCR, S_G, SP_SCR, S_T, SP_SCR, S_G, KF));
    p.push_back(mkop(OP_ACT, FN_MUL,  SP_SCR, S_G, SP_SCR, S_U, SP_SCR, S_G, KF));
    p.push_back(mkop(OP_NORM, FN_COPY, SP_SCR, S_G, SP_SCR, 0, SP_SCR, 0, KF, 1, nwb + 3*KD));
    p.push_back(mkop(OP_TMAT, FN_COPY, SP_SCR, 0, SP_SCR, 0, SP_SCR, S_T, KF, KD, r, sh));
    p.push_back(mkop(OP_RESID, FN_ADD, SP_SCR, S_T, SP_OUT, 0, SP_OUT, 0, KD));
  endfunction

  class card_model #(int LANES = 16, int HS_TILES = 64);
    int wt  [][LANES][LANES];      // [row][col][j] ternary weights
    int nw  [1024][LANES];         // norm weights
    int scr [128][LANES];
    int outb[32][LANES];
    int hid [16*HS_TILES][LANES];
    int actb[32][LANES];
    op_t prog [$];

    function new(int rows = 1);
      wt = new[rows];
      foreach (scr[a, i]) scr[a][i] = 0;
      foreach (outb[a, i]) outb[a][i] = 0;
      foreach (hid[a, i]) hid[a][i] = 0;
      foreach (actb[a, i]) actb[a][i] = 0;
      foreach (nw[a, i]) nw[a][i] = 0;
    endfunction
    int  sent [$];                 // tiles sent, LANES values per tile
    int  in_q [$];                 // tiles waiting for OP_LOAD, LANES values per tile

    function int rd1(space_e sp, int addr, int batch, int i);
      if (sp == SP_SCR)      return scr[addr][i];
      else if (sp == SP_HID) return hid[batch*HS_TILES+addr][i];
      else                   return outb[addr][i];
    endfunction

    function void wr1(space_e sp, int addr, int batch, int i, int v);
      if (sp == SP_SCR)      scr[addr][i] = v;
      else if (sp == SP_HID) hid[batch*HS_TILES+addr][i] = v;
      else                   outb[addr][i] = v;
    endfunction

    function void run(int batch);
      foreach (prog[pc]) begin
        op_t o;
        o = prog[pc];
        case (o.op)
          OP_END: return;
          OP_LOAD: begin
            for (int t = 0; t < int'(o.len); t++) begin
              for (int i = 0; i < LANES; i++) outb[int'(o.d) + t][i] = in_q.pop_front();
            end
          end
          OP_SEND: begin
            for (int t = 0; t < int'(o.len); t++) begin
              for (int i = 0; i < LANES; i++) sent.push_back(outb[int'(o.a) + t][i]);
            end
          end
          OP_NORM: begin
            longint sumsq, mean, rad, r, inv, rk;
            int p [32][LANES];
            sumsq = 0;
            for (int t = 0; t < int'(o.len); t++) begin
              for (int i = 0; i < LANES; i++) begin
                int xi;
                xi = rd1(o.sp_a, int'(o.a) + t, batch, i);
                sumsq += xi * xi;
                p[t][i] = xi * nw[int'(o.wbase) + t][i];
              end
            end
            rk   = ((longint'(1) << 17) / o.len + 1) / 2;
            mean = ((sumsq * rk) >> (16 + $clog2(LANES))) + 1;
            rad  = mean << 4;
            if (rad > (1 << 20) - 1) rad = (1 << 20) - 1;
            r = longint'($floor($sqrt(real'(rad))));
            while (r * r > rad) r--;
            while ((r + 1) * (r + 1) <= rad) r++;
            inv = (r == 0) ? 65535 : ((longint'(1) << 17) / r + 1) / 2;
            if (inv > 65535) inv = 65535;
            for (int t = 0; t < int'(o.len); t++)
              for (int i = 0; i < LANES; i++)
                actb[t][i] = clamp(int'((longint'(p[t][i]) * inv) >>> 16));
          end
          OP_TMAT: begin
            for (int n = 0; n < o.n_out; n++) begin
              int wrow;
              wrow = int'(o.wbase) + n*int'(o.len);
              for (int c = 0; c < LANES; c++) begin
                longint acc;
                acc = 0;
                for (int k = 0; k < int'(o.len); k++)
                  for (int j = 0; j < LANES; j++)
                    acc += actb[k][j] * wt[wrow + k][c][j];
                scr[int'(o.d) + n][c] = clamp(int'(acc >>> o.shift));
              end
            end
          end
          OP_ACT, OP_RESID: begin
            for (int t = 0; t < int'(o.len); t++) begin
              int a [LANES], b [LANES], y [LANES];
              for (int i = 0; i < LANES; i++) begin
                if (o.op == OP_RESID) begin
                  a[i] = rd1(SP_SCR, int'(o.a) + t, batch, i);
                  b[i] = rd1(SP_OUT, int'(o.d) + t, batch, i);
                end else begin
                  a[i] = rd1(o.sp_a, int'(o.a) + t, batch, i);
                  b[i] = rd1(o.sp_b, int'(o.b) + t, batch, i);
                end
              end
              for (int i = 0; i < LANES; i++) begin
                if (o.op == OP_RESID) y[i] = clamp(a[i] + b[i]);
                else case (o.fn)
                  FN_ADD:  y[i] = clamp(a[i] + b[i]);
                  FN_SUB:  y[i] = clamp(a[i] - b[i]);
                  FN_MUL:  y[i] = clamp((a[i] * b[i]) >>> 4);
                  FN_SIG:  y[i] = sigmoid_ref(a[i]);
                  FN_ONEM: y[i] = clamp(16 - a[i]);
                  default: y[i] = clamp(a[i]);
                endcase
              end
              for (int i = 0; i < LANES; i++)
                wr1((o.op == OP_RESID) ? SP_OUT : o.sp_d, int'(o.d) + t, batch, i, y[i]);
            end
          end
          default: ;
        endcase
      end
    endfunction
  endclass
endpackage

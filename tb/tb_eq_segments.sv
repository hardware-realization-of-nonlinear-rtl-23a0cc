// tb_eq_segments: the full-size equalizer with 3, 5, 7 and 9 PWL segments.
//
// Four copies of the top level, at full size, differ only in SEG (3, 5, 7,
// 9). They get the same random LSTM and CNN weights and the same input
// window. The 3-segment copy keeps its reset hard sigmoid and hard tanh. The
// others are loaded with chord fits of sigmoid and tanh on [-xm, xm],
// xm = 2 + SEG/4. Each copy's 61 output symbols are checked bit-exactly
// against an integer model of the network using the same tables. The test
// also measures how far each copy's output lies from a floating-point model
// with the exact sigmoid and tanh (same weights, no retraining). It checks
// that this distance is smaller with 9 segments than with 3, which is the
// trend of the no-retraining curve in the equalizer's evaluation.
`timescale 1ns/1ps
module tb_eq_segments;
  import eq_pkg::*;
  import eq_ref_pkg::*;

  localparam int SEQ = SEQ_LEN, IN = N_FEAT, H = HIDDEN, KS = KERNEL, NF = FILTERS;
  localparam int K = IN + H + 1, C = 2 * H, OUTN = SEQ - KS + 1, CW = KS * C + 1;
  localparam int NV = 4;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  cfg_t           cfg [NV];
  logic           in_valid, out_ready;
  logic           in_ready [NV], out_valid [NV], busy [NV];
  data_t [IN-1:0] in_sym;
  data_t [NF-1:0] out_sym [NV];

  bilstm_cnn_eq #(.SEG(3)) u_s3 (.clk, .rst_n, .cfg(cfg[0]), .in_valid, .in_ready(in_ready[0]), .in_sym,
    .out_valid(out_valid[0]), .out_ready, .out_sym(out_sym[0]), .busy(busy[0]));
  bilstm_cnn_eq #(.SEG(5)) u_s5 (.clk, .rst_n, .cfg(cfg[1]), .in_valid, .in_ready(in_ready[1]), .in_sym,
    .out_valid(out_valid[1]), .out_ready, .out_sym(out_sym[1]), .busy(busy[1]));
  bilstm_cnn_eq #(.SEG(7)) u_s7 (.clk, .rst_n, .cfg(cfg[2]), .in_valid, .in_ready(in_ready[2]), .in_sym,
    .out_valid(out_valid[2]), .out_ready, .out_sym(out_sym[2]), .busy(busy[2]));
  bilstm_cnn_eq #(.SEG(9)) u_s9 (.clk, .rst_n, .cfg(cfg[3]), .in_valid, .in_ready(in_ready[3]), .in_sym,
    .out_valid(out_valid[3]), .out_ready, .out_sym(out_sym[3]), .busy(busy[3]));

  int  X  [SEQ][IN];
  int  WL [2][4][H][K];
  int  WC [NF][CW];
  int  yref [NV][OUTN][NF];
  real yflt [OUTN][NF];
  ref_pwl_t st [NV], tt [NV];

  task automatic ref_int(input int v);
    int hs [2][SEQ][H];
    int h [H], hn [H], c [H], pre [4], t;
    longint acc;
    for (int d = 0; d < 2; d++) begin
      for (int j = 0; j < H; j++) begin h[j] = 0; c[j] = 0; end
      for (int n = 0; n < SEQ; n++) begin
        t = d ? SEQ - 1 - n : n;
        for (int j = 0; j < H; j++) begin
          for (int g = 0; g < 4; g++) begin
            acc = longint'(WL[d][g][j][K-1]) * QONE;
            for (int f = 0; f < IN; f++) acc += longint'(WL[d][g][j][f]) * X[t][f];
            for (int i = 0; i < H; i++)  acc += longint'(WL[d][g][j][IN+i]) * h[i];
            pre[g] = sat16(floor_div(acc));
          end
          lstm_cell_ref(pre, c[j], st[v], tt[v], c[j], hn[j]);
          hs[d][t][j] = hn[j];
        end
        h = hn;
      end
    end
    for (int p = 0; p < OUTN; p++)
      for (int f = 0; f < NF; f++) begin
        acc = longint'(WC[f][CW-1]) * QONE;
        for (int k = 0; k < KS; k++)
          for (int ch = 0; ch < C; ch++)
            acc += longint'(WC[f][k * C + ch]) * ((ch < H) ? hs[0][p + k][ch] : hs[1][p + k][ch - H]);
        yref[v][p][f] = sat16(floor_div(acc));
      end
  endtask

  function automatic real sig(input real x);
    return 1.0 / (1.0 + $exp(-x));
  endfunction

  task automatic ref_float();
    real hs [2][SEQ][H];
    real h [H], hn [H], c [H], pre [4], acc;
    int t;
    for (int d = 0; d < 2; d++) begin
      for (int j = 0; j < H; j++) begin h[j] = 0.0; c[j] = 0.0; end
      for (int n = 0; n < SEQ; n++) begin
        t = d ? SEQ - 1 - n : n;
        for (int j = 0; j < H; j++) begin
          for (int g = 0; g < 4; g++) begin
            acc = real'(WL[d][g][j][K-1]) / QONE;
            for (int f = 0; f < IN; f++) acc += real'(WL[d][g][j][f]) * X[t][f] / QONE / QONE;
            for (int i = 0; i < H; i++)  acc += real'(WL[d][g][j][IN+i]) / QONE * h[i];
            pre[g] = acc;
          end
          c[j]  = sig(pre[1]) * c[j] + sig(pre[0]) * $tanh(pre[2]);
          hn[j] = sig(pre[3]) * $tanh(c[j]);
          hs[d][t][j] = hn[j];
        end
        h = hn;
      end
    end
    for (int p = 0; p < OUTN; p++)
      for (int f = 0; f < NF; f++) begin
        acc = real'(WC[f][CW-1]) / QONE;
        for (int k = 0; k < KS; k++)
          for (int ch = 0; ch < C; ch++)
            acc += real'(WC[f][k * C + ch]) / QONE * ((ch < H) ? hs[0][p + k][ch] : hs[1][p + k][ch - H]);
        yflt[p][f] = acc;
      end
  endtask

  task automatic cfg_all(input cfg_sel_e sel, input int bank, input int addr, input int data);
    @(negedge clk);
    for (int v = 0; v < NV; v++) cfg[v] = '{we: 1'b1, sel: sel, bank: 2'(bank), addr: 16'(addr), data: data_t'(data)};
    @(negedge clk);
    for (int v = 0; v < NV; v++) cfg[v].we = 1'b0;
  endtask

  task automatic cfg_one(input int v, input cfg_sel_e sel, input int bank, input int addr, input int data);
    @(negedge clk);
    cfg[v] = '{we: 1'b1, sel: sel, bank: 2'(bank), addr: 16'(addr), data: data_t'(data)};
    @(negedge clk);
    cfg[v].we = 1'b0;
  endtask

  int  nseg [NV] = '{3, 5, 7, 9};
  int  got [NV];
  real dev [NV];

  always @(posedge clk) begin
    if (rst_n && out_ready) begin
      for (int v = 0; v < NV; v++) begin
        if (out_valid[v]) begin
          for (int f = 0; f < NF; f++) begin
            real e;
            check(int'(out_sym[v][f]) == yref[v][got[v]][f],
                  $sformatf("SEG %0d symbol %0d out %0d = %0d exp %0d", nseg[v], got[v], f,
                            out_sym[v][f], yref[v][got[v]][f]));
            e = real'(out_sym[v][f]) / QONE - yflt[got[v]][f];
            dev[v] += e * e;
          end
          got[v]++;
        end
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < SEQ; t++)
      for (int f = 0; f < IN; f++) X[t][f] = $urandom_range(3 * QONE) - 3 * QONE / 2;
    for (int d = 0; d < 2; d++)
      for (int g = 0; g < 4; g++)
        for (int j = 0; j < H; j++)
          for (int k = 0; k < K; k++) WL[d][g][j][k] = $urandom_range(QONE) - QONE / 2;
    for (int f = 0; f < NF; f++)
      for (int a = 0; a < CW; a++) WC[f][a] = $urandom_range(QONE / 8) - QONE / 16;
    st[0] = hard_sig_tab();
    tt[0] = hard_tanh_tab();
    for (int v = 1; v < NV; v++) begin
      st[v] = chord_tab(nseg[v], 2.0 + 0.25 * nseg[v], 1'b1);
      tt[v] = chord_tab(nseg[v], 2.0 + 0.25 * nseg[v], 1'b0);
    end
    for (int v = 0; v < NV; v++) begin
      ref_int(v);
      got[v] = 0;
      dev[v] = 0.0;
    end
    ref_float();

    for (int v = 0; v < NV; v++) cfg[v] = '0;
    in_valid = 0; in_sym = '0; out_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int d = 0; d < 2; d++)
      for (int g = 0; g < 4; g++)
        for (int j = 0; j < H; j++)
          for (int k = 0; k < K; k++)
            cfg_all(d ? CFG_LSTM_BWD : CFG_LSTM_FWD, g, j * K + k, WL[d][g][j][k]);
    for (int f = 0; f < NF; f++)
      for (int a = 0; a < CW; a++) cfg_all(CFG_CNN, f, a, WC[f][a]);
    for (int v = 1; v < NV; v++)
      for (int s = 0; s < nseg[v]; s++) begin
        cfg_one(v, CFG_PWL_SIG,  PWL_LO,    s, st[v].lo[s]);
        cfg_one(v, CFG_PWL_SIG,  PWL_SLOPE, s, st[v].slope[s]);
        cfg_one(v, CFG_PWL_SIG,  PWL_ICPT,  s, st[v].icpt[s]);
        cfg_one(v, CFG_PWL_TANH, PWL_LO,    s, tt[v].lo[s]);
        cfg_one(v, CFG_PWL_TANH, PWL_SLOPE, s, tt[v].slope[s]);
        cfg_one(v, CFG_PWL_TANH, PWL_ICPT,  s, tt[v].icpt[s]);
      end

    // all four copies are in lock step, so one valid serves them all
    for (int i = 0; i < SEQ; i++) begin
      @(negedge clk);
      in_valid = 1'b1;
      for (int f = 0; f < IN; f++) in_sym[f] = data_t'(X[i][f]);
      @(posedge clk);
      for (int v = 0; v < NV; v++) check(in_ready[v], "copies out of step on input");
    end
    @(negedge clk);
    in_valid = 1'b0;
    wait (got[0] == OUTN && got[1] == OUTN && got[2] == OUTN && got[3] == OUTN);
    @(negedge clk);
    for (int v = 0; v < NV; v++) begin
      dev[v] = $sqrt(dev[v] / (OUTN * NF));
      $display("SEG %0d: rms distance from the exact-activation model %f", nseg[v], dev[v]);
    end
    check(dev[3] < dev[0], "9 segments are not closer to the exact model than 3");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

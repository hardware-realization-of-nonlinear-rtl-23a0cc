// tb_bilstm_cnn_eq: end-to-end testbench of the equalizer at full size.
//
// The top is instantiated with its default parameters (81-symbol windows,
// 4 features, 35 hidden units per direction, kernel 21, 2 filters,
// 3-segment activations). The test writes random LSTM and CNN weights, then
// equalizes three windows and compares every output symbol with an integer
// reference model of the whole network (forward LSTM, backward LSTM, 1-D
// convolution) computed in the testbench:
//   window 1: reset activation tables (hard sigmoid, hard tanh);
//   window 2: same weights, offered while window 1 is still busy, so the
//             input stalls on in_ready;
//   window 3: after rewriting the activation tables with other 3-segment
//             fits and new LSTM weights (configuration between windows).
// The input side inserts random gaps and the output side random back-
// pressure. The mechanisms exercised are counted and each must occur:
// input stalls, output back-pressure, every segment of both activation
// functions, and a configuration rewrite. The processing latency from the
// last accepted input to the first offered output is checked against
// SEQ*H*(IN+H+4) + OUTN*(KS*2H+3) + 6 cycles.
`timescale 1ns/1ps
module tb_bilstm_cnn_eq;
  import eq_pkg::*;
  import eq_ref_pkg::*;

  localparam int SEQ = SEQ_LEN, IN = N_FEAT, H = HIDDEN, KS = KERNEL, NF = FILTERS;
  localparam int K = IN + H + 1, C = 2 * H, OUTN = SEQ - KS + 1, CW = KS * C + 1;
  localparam int NWIN = 3;
  localparam int LAT = SEQ * H * (IN + H + 4) + OUTN * (KS * C + 3) + 6;

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

  cfg_t           cfg;
  logic           in_valid, in_ready, out_valid, out_ready, busy;
  data_t [IN-1:0] in_sym;
  data_t [NF-1:0] out_sym;

  bilstm_cnn_eq dut (.*);

  // stimulus and expected results
  int X    [NWIN][SEQ][IN];
  int WL   [2][2][4][H][K];     // [weight set][direction][gate][unit][column]
  int WC   [NF][CW];
  int yref [NWIN][OUTN][NF];
  ref_pwl_t sig_a, tanh_a, sig_b, tanh_b;

  // mechanism counters
  int n_in_stall = 0, n_out_bp = 0, n_cfg_rewrite = 0;
  int seg_hits [2][3];          // [0 sigmoid, 1 tanh][segment]

  function automatic int pwl_count(input ref_pwl_t t, input int x, input int fsel);
    seg_hits[fsel][seg_of(t, x)]++;
    return pwl(t, x);
  endfunction

  task automatic ref_window(input int w, input int ws, input ref_pwl_t st, input ref_pwl_t tt);
    int hs [2][SEQ][H];
    int h [H], hn [H], c [H], pre [4], gi, gf, gg, go, t;
    longint acc;
    for (int d = 0; d < 2; d++) begin
      for (int j = 0; j < H; j++) begin h[j] = 0; c[j] = 0; end
      for (int n = 0; n < SEQ; n++) begin
        t = d ? SEQ - 1 - n : n;
        for (int j = 0; j < H; j++) begin
          for (int g = 0; g < 4; g++) begin
            acc = longint'(WL[ws][d][g][j][K-1]) * QONE;
            for (int f = 0; f < IN; f++) acc += longint'(WL[ws][d][g][j][f]) * X[w][t][f];
            for (int i = 0; i < H; i++)  acc += longint'(WL[ws][d][g][j][IN+i]) * h[i];
            pre[g] = sat16(floor_div(acc));
          end
          gi = pwl_count(st, pre[0], 0);
          gf = pwl_count(st, pre[1], 0);
          gg = pwl_count(tt, pre[2], 1);
          go = pwl_count(st, pre[3], 0);
          c[j]  = sat16(floor_div(longint'(gf) * c[j] + longint'(gi) * gg));
          hn[j] = sat16(floor_div(longint'(go) * pwl_count(tt, c[j], 1)));
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
        yref[w][p][f] = sat16(floor_div(acc));
      end
  endtask

  task automatic cfg_write(input cfg_sel_e sel, input int bank, input int addr, input int data);
    @(negedge clk);
    cfg.we = 1'b1; cfg.sel = sel; cfg.bank = 2'(bank); cfg.addr = 16'(addr); cfg.data = data_t'(data);
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  task automatic load_lstm(input int ws);
    for (int d = 0; d < 2; d++)
      for (int g = 0; g < 4; g++)
        for (int j = 0; j < H; j++)
          for (int k = 0; k < K; k++)
            cfg_write(d ? CFG_LSTM_BWD : CFG_LSTM_FWD, g, j * K + k, WL[ws][d][g][j][k]);
  endtask

  task automatic load_pwl(input cfg_sel_e sel, input ref_pwl_t t);
    for (int s = 0; s < 3; s++) begin
      cfg_write(sel, PWL_LO, s, t.lo[s]);
      cfg_write(sel, PWL_SLOPE, s, t.slope[s]);
      cfg_write(sel, PWL_ICPT, s, t.icpt[s]);
    end
  endtask

  // input driver: window w is offered symbol by symbol with random gaps
  task automatic send_window(input int w);
    for (int i = 0; i < SEQ; i++) begin
      while ($urandom_range(3) == 0) begin
        @(negedge clk);
        in_valid = 1'b0;
      end
      @(negedge clk);
      in_valid = 1'b1;
      for (int f = 0; f < IN; f++) in_sym[f] = data_t'(X[w][i][f]);
      @(posedge clk);
      while (!in_ready) begin
        n_in_stall++;
        @(posedge clk);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  // output monitor
  int out_win = 0, out_idx = 0;
  int t_last_in = 0, lat_seen [NWIN];
  bit first_out_seen = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && in_ready) t_last_in <= int'($time / 10);
      if (out_valid && !first_out_seen) begin
        first_out_seen <= 1'b1;
        if (out_win < NWIN) lat_seen[out_win] <= int'($time / 10) - t_last_in;
      end
      if (out_valid && !out_ready) n_out_bp++;
      if (out_valid && out_ready) begin
        for (int f = 0; f < NF; f++)
          check(int'(out_sym[f]) == yref[out_win][out_idx][f],
                $sformatf("window %0d symbol %0d out %0d = %0d exp %0d", out_win, out_idx, f,
                          out_sym[f], yref[out_win][out_idx][f]));
        if (out_idx == OUTN - 1) begin
          out_idx <= 0;
          out_win <= out_win + 1;
          first_out_seen <= 1'b0;
        end else begin
          out_idx <= out_idx + 1;
        end
      end
    end
  end

  always @(negedge clk) out_ready <= ($urandom_range(9) < 7);

  initial begin
    repeat (1200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 0; w < NWIN; w++)
      for (int t = 0; t < SEQ; t++)
        for (int f = 0; f < IN; f++) X[w][t][f] = $urandom_range(3 * QONE) - 3 * QONE / 2;
    for (int ws = 0; ws < 2; ws++)
      for (int d = 0; d < 2; d++)
        for (int g = 0; g < 4; g++)
          for (int j = 0; j < H; j++)
            for (int k = 0; k < K; k++) WL[ws][d][g][j][k] = $urandom_range(QONE) - QONE / 2;
    for (int f = 0; f < NF; f++)
      for (int a = 0; a < CW; a++) WC[f][a] = $urandom_range(QONE / 8) - QONE / 16;
    sig_a  = hard_sig_tab();
    tanh_a = hard_tanh_tab();
    sig_b  = chord_tab(3, 3.0, 1'b1);
    tanh_b = chord_tab(3, 1.5, 1'b0);
    for (int s = 0; s < 2; s++) for (int g = 0; g < 3; g++) seg_hits[s][g] = 0;
    ref_window(0, 0, sig_a, tanh_a);
    ref_window(1, 0, sig_a, tanh_a);
    ref_window(2, 1, sig_b, tanh_b);

    cfg = '0; in_valid = 0; in_sym = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_lstm(0);
    for (int f = 0; f < NF; f++)
      for (int a = 0; a < CW; a++) cfg_write(CFG_CNN, f, a, WC[f][a]);

    send_window(0);
    check(busy, "busy after a full window");
    send_window(1);                       // stalls until window 0 has left
    wait (out_win == 2);
    @(negedge clk);
    check(!busy, "idle after window 1");
    load_pwl(CFG_PWL_SIG, sig_b);
    load_pwl(CFG_PWL_TANH, tanh_b);
    load_lstm(1);
    n_cfg_rewrite++;
    send_window(2);
    wait (out_win == 3);
    @(negedge clk);

    for (int w = 0; w < NWIN; w++)
      check(lat_seen[w] == LAT, $sformatf("window %0d latency %0d cycles, exp %0d", w, lat_seen[w], LAT));
    $display("mechanisms: input stall cycles %0d, output back-pressure cycles %0d, cfg rewrites %0d",
             n_in_stall, n_out_bp, n_cfg_rewrite);
    $display("segment hits sigmoid %0d/%0d/%0d tanh %0d/%0d/%0d", seg_hits[0][0], seg_hits[0][1],
             seg_hits[0][2], seg_hits[1][0], seg_hits[1][1], seg_hits[1][2]);
    check(n_in_stall > 0, "input stall never happened");
    check(n_out_bp > 0, "output back-pressure never happened");
    check(n_cfg_rewrite > 0, "configuration rewrite never happened");
    for (int s = 0; s < 2; s++)
      for (int g = 0; g < 3; g++)
        check(seg_hits[s][g] > 0, $sformatf("%s segment %0d never used", s ? "tanh" : "sigmoid", g));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

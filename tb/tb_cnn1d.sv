// tb_cnn1d: self-checking testbench of the 1-D convolution engine.
//
// Small sizes (SEQ = 9, H = 3, so 6 channels, kernel 4, 2 filters, 6 output
// positions). Random weights and biases are written through the weight
// port; the forward and backward hidden-state buffers are modelled with one
// cycle of read latency. Each output is compared with an integer
// convolution reference; the test checks that every position comes out
// once, in order, and that done arrives (SEQ-KS+1)*(KS*2H+3) cycles after
// start. Two windows are run with different data.
`timescale 1ns/1ps
module tb_cnn1d;
  import eq_pkg::*;
  import eq_ref_pkg::*;

  localparam int SEQ = 9, H = 3, KS = 4, NF = 2, C = 2 * H, OUTN = SEQ - KS + 1;
  localparam int AW = $clog2(KS * C + 1), HAW = $clog2(SEQ * H), OW = $clog2(OUTN);

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

  logic start, busy, done, w_we, y_valid;
  logic [0:0] w_filt;
  logic [AW-1:0] w_addr;
  data_t w_data;
  logic [HAW-1:0] hf_addr, hb_addr;
  data_t hf_data, hb_data;
  logic [OW-1:0] y_idx;
  data_t y [NF];

  int Hs [SEQ][C];
  int Wt [NF][KS * C + 1];
  int yref [OUTN][NF];
  int next_idx;

  cnn1d #(.SEQ(SEQ), .H(H), .KS(KS), .NF(NF)) dut (.*);

  always_ff @(posedge clk) begin
    hf_data <= data_t'(Hs[int'(hf_addr) / H][int'(hf_addr) % H]);
    hb_data <= data_t'(Hs[int'(hb_addr) / H][H + int'(hb_addr) % H]);
  end

  always_ff @(posedge clk) begin
    if (rst_n && y_valid) begin
      check(int'(y_idx) == next_idx, $sformatf("position %0d exp %0d", y_idx, next_idx));
      for (int f = 0; f < NF; f++)
        check(int'(y[f]) == yref[y_idx][f], $sformatf("p %0d f %0d y %0d exp %0d", y_idx, f, y[f], yref[y_idx][f]));
      next_idx <= next_idx + 1;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint acc;
    int t0, lat;
    start = 0; w_we = 0; w_filt = 0; w_addr = 0; w_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      for (int t = 0; t < SEQ; t++)
        for (int ch = 0; ch < C; ch++) Hs[t][ch] = $urandom_range(2 * QONE) - QONE;
      for (int f = 0; f < NF; f++)
        for (int a = 0; a <= KS * C; a++) Wt[f][a] = $urandom_range(QONE) - QONE / 2;
      if (run == 1) Wt[0][0] = 32767;  // large weight, drives saturation
      for (int p = 0; p < OUTN; p++)
        for (int f = 0; f < NF; f++) begin
          acc = longint'(Wt[f][KS * C]) * QONE;
          for (int k = 0; k < KS; k++)
            for (int ch = 0; ch < C; ch++) acc += longint'(Wt[f][k * C + ch]) * Hs[p + k][ch];
          yref[p][f] = sat16(floor_div(acc));
        end
      for (int f = 0; f < NF; f++)
        for (int a = 0; a <= KS * C; a++) begin
          @(negedge clk);
          w_we = 1; w_filt = 1'(f); w_addr = AW'(a); w_data = data_t'(Wt[f][a]);
        end
      @(negedge clk);
      w_we = 0;
      next_idx = 0;
      start = 1;
      t0 = $time / 10;
      @(negedge clk);
      start = 0;
      check(busy, "busy after start");
      lat = -1;
      while (lat < 0) begin
        @(posedge clk);
        #1;
        if (done) lat = $time / 10 - t0;
      end
      check(lat == OUTN * (KS * C + 3), $sformatf("window took %0d cycles, exp %0d", lat, OUTN * (KS * C + 3)));
      @(negedge clk);
      check(next_idx == OUTN, $sformatf("%0d positions emitted", next_idx));
      check(!busy, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_lstm_dir: self-checking testbench of one biLSTM direction engine.
//
// A forward and a reverse engine (SEQ = 6, IN = 4, H = 5, 3-segment hard
// activations) get random weights through their write ports and read a
// random input window from a one-cycle-latency memory model. Every hidden
// state they emit is compared with an integer LSTM reference run in the
// same direction; the test also checks that each (t, j) is written exactly
// once, that done comes SEQ*H*(IN+H+4) cycles after start, and that a
// second window (h and c restarted at zero) gives the same results.
`timescale 1ns/1ps
module tb_lstm_dir;
  import eq_pkg::*;
  import eq_ref_pkg::*;

  localparam int SEQ = 6, IN = 4, H = 5, K = IN + H + 1;
  localparam int AW = $clog2(H * K), TW = $clog2(SEQ), HW = $clog2(H);

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

  logic start;
  logic w_we;
  logic [1:0] w_gate;
  logic [AW-1:0] w_addr;
  data_t w_data;
  pwl_seg_t sig_tab [3], tanh_tab [3];

  logic          busy [2], done [2], h_we [2];
  logic [TW-1:0] x_addr [2], h_t [2];
  logic [HW-1:0] h_j [2];
  data_t         h_data [2];
  data_t [IN-1:0] x_data [2];

  int X [SEQ][IN];
  int W [4][H][K];
  int href [2][SEQ][H];
  int seen [2][SEQ][H];

  lstm_dir #(.SEQ(SEQ), .IN(IN), .H(H), .SEG(3), .REVERSE(1'b0)) u_f (
    .clk, .rst_n, .start, .busy(busy[0]), .done(done[0]),
    .w_we, .w_gate, .w_addr, .w_data,
    .x_addr(x_addr[0]), .x_data(x_data[0]), .sig_tab, .tanh_tab,
    .h_we(h_we[0]), .h_t(h_t[0]), .h_j(h_j[0]), .h_data(h_data[0]));
  lstm_dir #(.SEQ(SEQ), .IN(IN), .H(H), .SEG(3), .REVERSE(1'b1)) u_b (
    .clk, .rst_n, .start, .busy(busy[1]), .done(done[1]),
    .w_we, .w_gate, .w_addr, .w_data,
    .x_addr(x_addr[1]), .x_data(x_data[1]), .sig_tab, .tanh_tab,
    .h_we(h_we[1]), .h_t(h_t[1]), .h_j(h_j[1]), .h_data(h_data[1]));

  // input buffer model: one cycle read latency
  always_ff @(posedge clk) begin
    for (int d = 0; d < 2; d++)
      for (int f = 0; f < IN; f++) x_data[d][f] <= data_t'(X[x_addr[d]][f]);
  end

  // collect and check emitted hidden states
  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int d = 0; d < 2; d++) begin
        if (h_we[d]) begin
          seen[d][h_t[d]][h_j[d]] <= seen[d][h_t[d]][h_j[d]] + 1;
          check(int'(h_data[d]) == href[d][h_t[d]][h_j[d]],
                $sformatf("dir %0d t %0d j %0d h %0d exp %0d", d, h_t[d], h_j[d], h_data[d],
                          href[d][h_t[d]][h_j[d]]));
        end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ref_model(input ref_pwl_t st, input ref_pwl_t tt);
    int h [H], hn [H], c [H], pre [4], cn, hh, t;
    longint acc;
    for (int d = 0; d < 2; d++) begin
      for (int j = 0; j < H; j++) begin h[j] = 0; c[j] = 0; end
      for (int n = 0; n < SEQ; n++) begin
        t = d ? SEQ - 1 - n : n;
        for (int j = 0; j < H; j++) begin
          for (int g = 0; g < 4; g++) begin
            acc = longint'(W[g][j][K-1]) * QONE;
            for (int f = 0; f < IN; f++) acc += longint'(W[g][j][f]) * X[t][f];
            for (int i = 0; i < H; i++)  acc += longint'(W[g][j][IN+i]) * h[i];
            pre[g] = sat16(floor_div(acc));
          end
          lstm_cell_ref(pre, c[j], st, tt, cn, hh);
          c[j] = cn;
          hn[j] = hh;
          href[d][t][j] = hh;
        end
        h = hn;
      end
    end
  endtask

  initial begin
    ref_pwl_t st, tt;
    int t0, lat [2];
    st = hard_sig_tab();
    tt = hard_tanh_tab();
    for (int s = 0; s < 3; s++) begin
      sig_tab[s]  = '{lo: data_t'(st.lo[s]), slope: data_t'(st.slope[s]), icpt: data_t'(st.icpt[s])};
      tanh_tab[s] = '{lo: data_t'(tt.lo[s]), slope: data_t'(tt.slope[s]), icpt: data_t'(tt.icpt[s])};
    end
    for (int t = 0; t < SEQ; t++)
      for (int f = 0; f < IN; f++) X[t][f] = $urandom_range(3 * QONE) - 3 * QONE / 2;
    for (int g = 0; g < 4; g++)
      for (int j = 0; j < H; j++)
        for (int k = 0; k < K; k++) W[g][j][k] = $urandom_range(QONE * 3 / 2) - QONE * 3 / 4;
    ref_model(st, tt);
    for (int d = 0; d < 2; d++)
      for (int t = 0; t < SEQ; t++)
        for (int j = 0; j < H; j++) seen[d][t][j] = 0;
    start = 0; w_we = 0; w_gate = 0; w_addr = 0; w_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 4; g++)
      for (int j = 0; j < H; j++)
        for (int k = 0; k < K; k++) begin
          @(negedge clk);
          w_we = 1; w_gate = 2'(g); w_addr = AW'(j * K + k); w_data = data_t'(W[g][j][k]);
        end
    @(negedge clk);
    w_we = 0;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk);
      start = 1;
      t0 = $time / 10;
      @(negedge clk);
      start = 0;
      check(busy[0] && busy[1], "busy after start");
      lat = '{-1, -1};
      while (lat[0] < 0 || lat[1] < 0) begin
        @(posedge clk);
        #1;
        for (int d = 0; d < 2; d++) if (done[d] && lat[d] < 0) lat[d] = $time / 10 - t0;
      end
      for (int d = 0; d < 2; d++)
        check(lat[d] == SEQ * H * (IN + H + 4),
              $sformatf("dir %0d window took %0d cycles, exp %0d", d, lat[d], SEQ * H * (IN + H + 4)));
      @(negedge clk);
      check(!busy[0] && !busy[1], "idle after done");
    end
    for (int d = 0; d < 2; d++)
      for (int t = 0; t < SEQ; t++)
        for (int j = 0; j < H; j++)
          check(seen[d][t][j] == 2, $sformatf("dir %0d t %0d j %0d written %0d times", d, t, j, seen[d][t][j]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

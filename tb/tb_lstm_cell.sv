// tb_lstm_cell: self-checking testbench of the LSTM cell update.
//
// Drives random gate pre-activations and cell states (spread over all three
// segments of the hard sigmoid and hard tanh, and into saturation), one per
// cycle, and compares c' and h' one cycle later with the integer reference
// model; also checks that out_valid follows in_valid by exactly one cycle.
`timescale 1ns/1ps
module tb_lstm_cell;
  import eq_pkg::*;
  import eq_ref_pkg::*;

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

  logic     in_valid, out_valid;
  data_t    pre [N_GATES];
  data_t    c_prev, c_new, h_new;
  pwl_seg_t sig_tab [3], tanh_tab [3];

  lstm_cell #(.SEG(3)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_pwl_t st, tt;
    int p [4], c, ec, eh, pc, ph;
    bit pv;
    st = hard_sig_tab();
    tt = hard_tanh_tab();
    for (int s = 0; s < 3; s++) begin
      sig_tab[s]  = '{lo: data_t'(st.lo[s]), slope: data_t'(st.slope[s]), icpt: data_t'(st.icpt[s])};
      tanh_tab[s] = '{lo: data_t'(tt.lo[s]), slope: data_t'(tt.slope[s]), icpt: data_t'(tt.icpt[s])};
    end
    in_valid = 0; c_prev = 0;
    for (int g = 0; g < 4; g++) pre[g] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    pv = 0;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      // results of the previous cycle
      check(out_valid == pv, $sformatf("out_valid %0b exp %0b", out_valid, pv));
      if (pv) begin
        check(int'(c_new) == pc, $sformatf("c' %0d exp %0d", c_new, pc));
        check(int'(h_new) == ph, $sformatf("h' %0d exp %0d", h_new, ph));
      end
      in_valid = ($urandom_range(3) != 0);
      for (int g = 0; g < 4; g++) begin
        p[g] = $urandom_range(5 * QONE) - (5 * QONE) / 2 - ((n % 7 == 0) ? 3 * QONE : 0);
        pre[g] = data_t'(p[g]);
      end
      c = $urandom_range(6 * QONE) - 3 * QONE;
      if (n % 11 == 0) c = (n % 2) ? 32767 : -32768;
      c_prev = data_t'(c);
      lstm_cell_ref(p, c, st, tt, ec, eh);
      if (in_valid) begin
        pc = ec;
        ph = eh;
      end
      pv = in_valid;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pwl_eval: self-checking testbench of the PWL evaluator.
//
// Part 1 (3 segments): sweeps every 16-bit input through a hard-tanh and a
// hard-sigmoid table and compares with the closed forms clamp(x, -1, 1) and
// clamp(floor(x/4) + 1/2, 0, 1).
// Part 2 (3, 5, 7 and 9 segments, the sizes whose tanh resources the design
// was compared on): loads chord fits of tanh and sigmoid on [-xm, xm], xm = 2 + n/4, checks
// every input against the table formula, and checks that the worst error
// against the real function falls as segments are added (3 -> 5, 3 -> 7,
// 5 -> 9).
`timescale 1ns/1ps
module tb_pwl_eval;
  import eq_pkg::*;
  import eq_ref_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic void to_tab(input ref_pwl_t r, output pwl_seg_t t [9]);
    for (int s = 0; s < 9; s++) begin
      t[s].lo    = data_t'(r.lo[s]);
      t[s].slope = data_t'(r.slope[s]);
      t[s].icpt  = data_t'(r.icpt[s]);
    end
  endfunction

  // 3-segment hard functions
  data_t    x;
  pwl_seg_t tab_ht [3], tab_hs [3];
  data_t    y_ht, y_hs;
  pwl_eval #(.SEG(3)) u_ht (.x(x), .tab(tab_ht), .y(y_ht));
  pwl_eval #(.SEG(3)) u_hs (.x(x), .tab(tab_hs), .y(y_hs));

  // fitted tables for 3/5/7/9 segments
  pwl_seg_t t3 [3], t5 [5], t7 [7], t9 [9];
  data_t    y3, y5, y7, y9;
  pwl_eval #(.SEG(3)) u_f3 (.x(x), .tab(t3), .y(y3));
  pwl_eval #(.SEG(5)) u_f5 (.x(x), .tab(t5), .y(y5));
  pwl_eval #(.SEG(7)) u_f7 (.x(x), .tab(t7), .y(y7));
  pwl_eval #(.SEG(9)) u_f9 (.x(x), .tab(t9), .y(y9));

  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_pwl_t ht, hs, r [4];
    pwl_seg_t tmp [9];
    int nseg [4] = '{3, 5, 7, 9};
    real maxerr [4];
    real fx;

    ht = hard_tanh_tab();
    hs = hard_sig_tab();
    to_tab(ht, tmp); for (int s = 0; s < 3; s++) tab_ht[s] = tmp[s];
    to_tab(hs, tmp); for (int s = 0; s < 3; s++) tab_hs[s] = tmp[s];

    for (int v = -32768; v < 32768; v++) begin
      x = data_t'(v);
      #1;
      check(int'(y_ht) == hard_tanh(v), $sformatf("hard tanh x=%0d y=%0d", v, y_ht));
      check(int'(y_hs) == hard_sig(v),  $sformatf("hard sigmoid x=%0d y=%0d", v, y_hs));
    end

    for (int fsel = 0; fsel < 2; fsel++) begin
      for (int i = 0; i < 4; i++) begin
        r[i] = chord_tab(nseg[i], 2.0 + 0.25 * nseg[i], fsel == 1);
        maxerr[i] = 0.0;
      end
      to_tab(r[0], tmp); for (int s = 0; s < 3; s++) t3[s] = tmp[s];
      to_tab(r[1], tmp); for (int s = 0; s < 5; s++) t5[s] = tmp[s];
      to_tab(r[2], tmp); for (int s = 0; s < 7; s++) t7[s] = tmp[s];
      to_tab(r[3], tmp); for (int s = 0; s < 9; s++) t9[s] = tmp[s];
      for (int v = -6 * QONE; v <= 6 * QONE; v += 7) begin
        int yy [4];
        x = data_t'(v);
        #1;
        yy = '{int'(y3), int'(y5), int'(y7), int'(y9)};
        fx = (fsel == 1) ? 1.0 / (1.0 + $exp(-real'(v) / QONE)) : $tanh(real'(v) / QONE);
        for (int i = 0; i < 4; i++) begin
          real e;
          check(yy[i] == pwl(r[i], v),
                $sformatf("%0d-seg fit f%0d x=%0d y=%0d exp=%0d", nseg[i], fsel, v, yy[i], pwl(r[i], v)));
          e = real'(yy[i]) / QONE - fx;
          if (e < 0) e = -e;
          if (e > maxerr[i]) maxerr[i] = e;
        end
      end
      $display("%s max |error| for 3/5/7/9 segments: %f %f %f %f", fsel ? "sigmoid" : "tanh",
               maxerr[0], maxerr[1], maxerr[2], maxerr[3]);
      // uniform chords are not optimal fits, so neighbouring counts may tie;
      // the error must still fall over every step of 4 segments and from 3 to 5
      check(maxerr[1] < maxerr[0], "error does not fall from 3 to 5 segments");
      for (int i = 2; i < 4; i++)
        check(maxerr[i] < maxerr[i-2], $sformatf("error does not fall from %0d to %0d segments", nseg[i-2], nseg[i]));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

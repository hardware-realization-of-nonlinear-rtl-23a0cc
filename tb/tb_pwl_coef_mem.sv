// tb_pwl_coef_mem: self-checking testbench of the PWL coefficient store.
//
// Checks the reset tables of a 3-segment tanh and sigmoid store word by
// word, checks that the 5-segment reset tables evaluate to the same hard
// functions for every input, then writes new coefficients (one cycle to
// take effect), and checks that a write to a segment index beyond the table
// changes nothing.
`timescale 1ns/1ps
module tb_pwl_coef_mem;
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

  logic       we;
  pwl_field_e field;
  logic [7:0] idx;
  data_t      wdata;

  pwl_seg_t tt3 [3], ts3 [3], tt5 [5], ts5 [5];

  pwl_coef_mem #(.SEG(3), .IS_SIGMOID(1'b0)) u_t3 (.clk, .rst_n, .we, .field, .idx, .wdata, .tab(tt3));
  pwl_coef_mem #(.SEG(3), .IS_SIGMOID(1'b1)) u_s3 (.clk, .rst_n, .we, .field, .idx, .wdata, .tab(ts3));
  pwl_coef_mem #(.SEG(5), .IS_SIGMOID(1'b0)) u_t5 (.clk, .rst_n, .we(1'b0), .field, .idx, .wdata, .tab(tt5));
  pwl_coef_mem #(.SEG(5), .IS_SIGMOID(1'b1)) u_s5 (.clk, .rst_n, .we(1'b0), .field, .idx, .wdata, .tab(ts5));

  function automatic ref_pwl_t from5(input pwl_seg_t t [5]);
    ref_pwl_t r;
    r.n = 5;
    for (int s = 0; s < 5; s++) begin
      r.lo[s] = int'(t[s].lo); r.slope[s] = int'(t[s].slope); r.icpt[s] = int'(t[s].icpt);
    end
    return r;
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_pwl_t r;
    we = 0; field = PWL_LO; idx = 0; wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // 3-segment reset tables: breakpoints +-1 (tanh), +-2 (sigmoid)
    check(tt3[1].lo == -16'sd4096 && tt3[2].lo == 16'sd4096, "tanh breakpoints");
    check(tt3[0].slope == 0 && tt3[1].slope == 16'sd4096 && tt3[2].slope == 0, "tanh slopes");
    check(tt3[0].icpt == -16'sd4096 && tt3[1].icpt == 0 && tt3[2].icpt == 16'sd4096, "tanh intercepts");
    check(ts3[1].lo == -16'sd8192 && ts3[2].lo == 16'sd8192, "sigmoid breakpoints");
    check(ts3[0].slope == 0 && ts3[1].slope == 16'sd1024 && ts3[2].slope == 0, "sigmoid slopes");
    check(ts3[0].icpt == 0 && ts3[1].icpt == 16'sd2048 && ts3[2].icpt == 16'sd4096, "sigmoid intercepts");
    // 5-segment reset tables are the same hard functions
    for (int v = -32768; v < 32768; v += 3) begin
      r = from5(tt5);
      check(pwl(r, v) == hard_tanh(v), $sformatf("5-seg tanh x=%0d", v));
      r = from5(ts5);
      check(pwl(r, v) == hard_sig(v), $sformatf("5-seg sigmoid x=%0d", v));
    end
    // write every field of segment 1
    @(negedge clk);
    we = 1; idx = 1; field = PWL_LO; wdata = -16'sd1234;
    @(negedge clk);
    check(tt3[1].lo == -16'sd1234 && ts3[1].lo == -16'sd1234, "breakpoint write");
    field = PWL_SLOPE; wdata = 16'sd3000;
    @(negedge clk);
    field = PWL_ICPT; wdata = 16'sd77;
    @(negedge clk);
    check(tt3[1].slope == 16'sd3000 && tt3[1].icpt == 16'sd77, "slope and intercept write");
    check(tt3[0].lo == -16'sd32768 && tt3[2].icpt == 16'sd4096, "other segments untouched");
    // out-of-range index is ignored
    idx = 3; field = PWL_ICPT; wdata = 16'sd555;
    @(negedge clk);
    we = 0;
    check(tt3[0].icpt == -16'sd4096 && tt3[1].icpt == 16'sd77 && tt3[2].icpt == 16'sd4096, "index 3 ignored");
    // reset restores the hard functions
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
    check(tt3[1].lo == -16'sd4096 && tt3[1].slope == 16'sd4096 && tt3[1].icpt == 0, "reset restores");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

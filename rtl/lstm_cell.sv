// lstm_cell: state update of one LSTM hidden unit with PWL activations.
//
// Given the four gate pre-activations of a unit (order i, f, g, o) and its
// previous cell state c, it computes
//     i = sig(pre_i)  f = sig(pre_f)  g = tanh(pre_g)  o = sig(pre_o)
//     c' = sat((f*c + i*g) >>> FRAC)
//     h' = sat((o * tanh(c')) >>> FRAC)
// where sig and tanh are the piecewise-linear approximations held in the
// sigmoid and tanh coefficient tables (five pwl_eval instances share them).
//
// Interface: in_valid with pre[] and c_prev; out_valid with c_new and h_new.
// Timing: one register stage, results appear one cycle after in_valid.
//
// The LSTM equations and the use of sigmoid and tanh replaced by PWL follow
// the paper; the gate order (i, f, g, o), the single rounding of f*c + i*g
// and the one-cycle pipeline are this design's choices.
module lstm_cell
  import eq_pkg::*;
#(
  parameter int SEG = SEGMENTS
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  data_t    pre [N_GATES],
  input  data_t    c_prev,
  input  pwl_seg_t sig_tab  [SEG],
  input  pwl_seg_t tanh_tab [SEG],
  output logic     out_valid,
  output data_t    c_new,
  output data_t    h_new
);

  data_t ig, fg, gg, og, c_nxt, tc, h_nxt;

  pwl_eval #(.SEG(SEG)) u_sig_i (.x(pre[GATE_I]), .tab(sig_tab),  .y(ig));
  pwl_eval #(.SEG(SEG)) u_sig_f (.x(pre[GATE_F]), .tab(sig_tab),  .y(fg));
  pwl_eval #(.SEG(SEG)) u_tnh_g (.x(pre[GATE_G]), .tab(tanh_tab), .y(gg));
  pwl_eval #(.SEG(SEG)) u_sig_o (.x(pre[GATE_O]), .tab(sig_tab),  .y(og));
  pwl_eval #(.SEG(SEG)) u_tnh_c (.x(c_nxt),       .tab(tanh_tab), .y(tc));

  always_comb begin
    c_nxt = rescale(acc_t'(fg) * acc_t'(c_prev) + acc_t'(ig) * acc_t'(gg));
    h_nxt = rescale(acc_t'(og) * acc_t'(tc));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      c_new     <= '0;
      h_new     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        c_new <= c_nxt;
        h_new <= h_nxt;
      end
    end
  end

endmodule

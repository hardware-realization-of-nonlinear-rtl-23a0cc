// bilstm_cnn_eq: biLSTM + 1-D CNN optical channel equalizer with
// piecewise-linear sigmoid and tanh (top level).
//
// A window of SEQ received dual-polarisation symbols (features XI, XQ, YI,
// YQ) is equalized into SEQ-KS+1 symbols of the X polarisation (XI, XQ):
//   1. LOAD : SEQ symbols are accepted on in_valid/in_ready into the input
//             buffer.
//   2. LSTM : the forward and the backward LSTM engines (lstm_dir) run in
//             parallel over the window, each writing its H hidden states per
//             symbol into its own buffer.
//   3. CNN  : the convolution engine (cnn1d) turns the 2H-channel sequence
//             into the output symbols, stored in the output buffer.
//   4. DRAIN: the output symbols leave on out_valid/out_ready; then the next
//             window can be loaded.
// Both LSTM engines share one sigmoid and one tanh coefficient table
// (pwl_coef_mem), reset to the 3-segment hard sigmoid and hard tanh.
//
// Interface: cfg writes weights and PWL coefficients (see eq_pkg::cfg_t);
// it is accepted only in the LOAD phase. in_sym/out_sym use valid/ready
// handshakes: a transfer happens on a clock edge where both are high, and
// out_valid/out_sym stay stable until accepted. busy is high outside LOAD.
// Timing at the defaults: 81 load cycles, 121,905 + 2 LSTM cycles, 89,853 + 1
// CNN cycles, then 61 output cycles plus one read cycle when out_ready
// stays high.
//
// The layer sizes and the PWL activations follow the paper; the streaming
// interface, the phase sequencing, the buffers and the configuration bus are
// this design's choices.
module bilstm_cnn_eq
  import eq_pkg::*;
#(
  parameter int SEQ = SEQ_LEN,
  parameter int IN  = N_FEAT,
  parameter int H   = HIDDEN,
  parameter int KS  = KERNEL,
  parameter int NF  = FILTERS,
  parameter int SEG = SEGMENTS
) (
  input  logic           clk,
  input  logic           rst_n,
  input  cfg_t           cfg,
  input  logic           in_valid,
  output logic           in_ready,
  input  data_t [IN-1:0] in_sym,
  output logic           out_valid,
  input  logic           out_ready,
  output data_t [NF-1:0] out_sym,
  output logic           busy
);

  localparam int OUTN   = SEQ - KS + 1;
  localparam int TW     = (SEQ > 1) ? $clog2(SEQ) : 1;
  localparam int HW     = (H > 1) ? $clog2(H) : 1;
  localparam int OW     = (OUTN > 1) ? $clog2(OUTN) : 1;
  localparam int HAW    = $clog2(SEQ * H);
  localparam int LAW    = $clog2(H * (IN + H + 1));
  localparam int CAW    = $clog2(KS * 2 * H + 1);
  localparam int FW     = (NF > 1) ? $clog2(NF) : 1;

  typedef enum logic [2:0] {S_LOAD, S_LSTM, S_CNN, S_OPRE, S_OUT} state_e;
  state_e state;

  // ---------------------------------------------------------------- PWL tables
  pwl_seg_t sig_tab  [SEG];
  pwl_seg_t tanh_tab [SEG];

  pwl_coef_mem #(.SEG(SEG), .IS_SIGMOID(1'b1)) u_sig_coef (
    .clk(clk), .rst_n(rst_n),
    .we   (cfg.we && cfg.sel == CFG_PWL_SIG),
    .field(pwl_field_e'(cfg.bank)),
    .idx  (cfg.addr[7:0]),
    .wdata(cfg.data),
    .tab  (sig_tab)
  );

  pwl_coef_mem #(.SEG(SEG), .IS_SIGMOID(1'b0)) u_tanh_coef (
    .clk(clk), .rst_n(rst_n),
    .we   (cfg.we && cfg.sel == CFG_PWL_TANH),
    .field(pwl_field_e'(cfg.bank)),
    .idx  (cfg.addr[7:0]),
    .wdata(cfg.data),
    .tab  (tanh_tab)
  );

  // ------------------------------------------------------------- input buffer
  logic [TW-1:0]        in_cnt;
  logic [TW-1:0]        x_ra [2];
  logic [IN*DATA_W-1:0] x_rd [2];

  seq_ram #(.WIDTH(IN*DATA_W), .DEPTH(SEQ), .NR(2)) u_in_buf (
    .clk  (clk),
    .we   (in_valid && in_ready),
    .waddr(in_cnt),
    .wdata(in_sym),
    .raddr(x_ra),
    .rdata(x_rd)
  );

  // -------------------------------------------------------------- LSTM engines
  logic lstm_start;
  logic f_busy, f_done, b_busy, b_done, f_fin, b_fin;
  logic f_we, b_we;
  logic [TW-1:0] f_t, b_t;
  logic [HW-1:0] f_j, b_j;
  data_t f_h, b_h;

  lstm_dir #(.SEQ(SEQ), .IN(IN), .H(H), .SEG(SEG), .REVERSE(1'b0)) u_fwd (
    .clk(clk), .rst_n(rst_n),
    .start(lstm_start), .busy(f_busy), .done(f_done),
    .w_we  (cfg.we && cfg.sel == CFG_LSTM_FWD),
    .w_gate(cfg.bank),
    .w_addr(cfg.addr[LAW-1:0]),
    .w_data(cfg.data),
    .x_addr(x_ra[0]),
    .x_data(x_rd[0]),
    .sig_tab(sig_tab), .tanh_tab(tanh_tab),
    .h_we(f_we), .h_t(f_t), .h_j(f_j), .h_data(f_h)
  );

  lstm_dir #(.SEQ(SEQ), .IN(IN), .H(H), .SEG(SEG), .REVERSE(1'b1)) u_bwd (
    .clk(clk), .rst_n(rst_n),
    .start(lstm_start), .busy(b_busy), .done(b_done),
    .w_we  (cfg.we && cfg.sel == CFG_LSTM_BWD),
    .w_gate(cfg.bank),
    .w_addr(cfg.addr[LAW-1:0]),
    .w_data(cfg.data),
    .x_addr(x_ra[1]),
    .x_data(x_rd[1]),
    .sig_tab(sig_tab), .tanh_tab(tanh_tab),
    .h_we(b_we), .h_t(b_t), .h_j(b_j), .h_data(b_h)
  );

  // ------------------------------------------------------ biLSTM output buffers
  logic [HAW-1:0]    hf_ra [1], hb_ra [1];
  logic [DATA_W-1:0] hf_rd [1], hb_rd [1];

  seq_ram #(.WIDTH(DATA_W), .DEPTH(SEQ*H), .NR(1)) u_hf_buf (
    .clk(clk), .we(f_we),
    .waddr(HAW'(int'(f_t) * H + int'(f_j))),
    .wdata(f_h), .raddr(hf_ra), .rdata(hf_rd)
  );

  seq_ram #(.WIDTH(DATA_W), .DEPTH(SEQ*H), .NR(1)) u_hb_buf (
    .clk(clk), .we(b_we),
    .waddr(HAW'(int'(b_t) * H + int'(b_j))),
    .wdata(b_h), .raddr(hb_ra), .rdata(hb_rd)
  );

  // ---------------------------------------------------------------- CNN engine
  logic          cnn_start, cnn_busy, cnn_done;
  logic          y_valid;
  logic [OW-1:0] y_idx;
  data_t         y [NF];
  data_t [NF-1:0] y_packed;

  cnn1d #(.SEQ(SEQ), .H(H), .KS(KS), .NF(NF)) u_cnn (
    .clk(clk), .rst_n(rst_n),
    .start(cnn_start), .busy(cnn_busy), .done(cnn_done),
    .w_we  (cfg.we && cfg.sel == CFG_CNN),
    .w_filt(FW'(cfg.bank)),
    .w_addr(cfg.addr[CAW-1:0]),
    .w_data(cfg.data),
    .hf_addr(hf_ra[0]), .hf_data(hf_rd[0]),
    .hb_addr(hb_ra[0]), .hb_data(hb_rd[0]),
    .y_valid(y_valid), .y_idx(y_idx), .y(y)
  );

  always_comb begin
    for (int f = 0; f < NF; f++) y_packed[f] = y[f];
  end

  // ------------------------------------------------------------ output buffer
  logic [OW-1:0]        o_ptr;
  logic [OW-1:0]        o_ra [1];
  logic [NF*DATA_W-1:0] o_rd [1];

  seq_ram #(.WIDTH(NF*DATA_W), .DEPTH(OUTN), .NR(1)) u_out_buf (
    .clk(clk), .we(y_valid),
    .waddr(y_idx), .wdata(y_packed),
    .raddr(o_ra), .rdata(o_rd)
  );

  // read the entry after the one being accepted, so the next one is ready
  assign o_ra[0]  = (state == S_OUT && out_valid && out_ready) ? o_ptr + 1'b1 : o_ptr;
  assign out_sym  = o_rd[0];
  assign out_valid = (state == S_OUT);

  // ---------------------------------------------------------------- sequencer
  assign in_ready = (state == S_LOAD);
  assign busy     = (state != S_LOAD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_LOAD;
      in_cnt     <= '0;
      o_ptr      <= '0;
      lstm_start <= 1'b0;
      cnn_start  <= 1'b0;
      f_fin      <= 1'b0;
      b_fin      <= 1'b0;
    end else begin
      lstm_start <= 1'b0;
      cnn_start  <= 1'b0;
      unique case (state)
        S_LOAD: begin
          if (in_valid) begin
            if (int'(in_cnt) == SEQ - 1) begin
              in_cnt     <= '0;
              state      <= S_LSTM;
              lstm_start <= 1'b1;
              f_fin      <= 1'b0;
              b_fin      <= 1'b0;
            end else begin
              in_cnt <= in_cnt + 1'b1;
            end
          end
        end
        S_LSTM: begin
          if (f_done) f_fin <= 1'b1;
          if (b_done) b_fin <= 1'b1;
          if ((f_fin || f_done) && (b_fin || b_done)) begin
            state     <= S_CNN;
            cnn_start <= 1'b1;
          end
        end
        S_CNN: begin
          if (cnn_done) begin
            state <= S_OPRE;
            o_ptr <= '0;
          end
        end
        S_OPRE: state <= S_OUT;
        S_OUT: begin
          if (out_ready) begin
            if (int'(o_ptr) == OUTN - 1) begin
              o_ptr <= '0;
              state <= S_LOAD;
            end else begin
              o_ptr <= o_ptr + 1'b1;
            end
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // configuration is only taken while no window is being processed
  assert property (@(posedge clk) disable iff (!rst_n) cfg.we |-> (state == S_LOAD));
  // an offered output symbol stays put until it is accepted
  assert property (@(posedge clk) disable iff (!rst_n)
                   (out_valid && !out_ready) |=> (out_valid && $stable(out_sym)));
  // the engines run only in their own phase
  assert property (@(posedge clk) disable iff (!rst_n) (f_busy || b_busy) |-> (state == S_LSTM));
  assert property (@(posedge clk) disable iff (!rst_n) cnn_busy |-> (state == S_CNN));

endmodule

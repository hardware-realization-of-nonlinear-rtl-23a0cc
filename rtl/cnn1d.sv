// cnn1d: linear 1-D convolution layer of the equalizer.
//
// Convolves the C = 2*H channel biLSTM output (channels 0..H-1 forward,
// H..2H-1 backward) over time with NF filters of KS taps, no padding and no
// activation, producing SEQ-KS+1 output symbols of NF values each:
//     y_f[p] = sum_{k<KS} sum_{ch<C} W_f[k][ch] * h[p+k][ch] + b_f
// At the defaults: 70 channels, kernel 21, 2 filters (the I and Q parts of
// the recovered X polarisation), 81 -> 61 positions.
//
// Schedule: one output position at a time; NF multiply-accumulate lanes (one
// per filter) consume one (tap, channel) pair per clock in tap-major order,
// followed by the bias word multiplied by 1.0. The forward and backward
// hidden states are read from two separate buffers, addressed t*H + j, with
// one cycle of read latency.
//
// Weight memory: NF seq_ram banks of KS*C+1 words; word k*C+ch holds
// W_f[k][ch] and word KS*C holds b_f. Written through w_we/w_filt/w_addr/
// w_data while idle.
//
// Interface: start (pulse, when idle); busy; done pulses at the end. Each
// finished position is presented for one cycle on y_valid/y_idx/y.
// Timing: KS*C+3 cycles per position (1473 at the defaults), (SEQ-KS+1)
// times that per window (89,853 at the defaults).
//
// Layer sizes follow the paper; the serial schedule, memory layout and
// handshake are this design's choices.
module cnn1d
  import eq_pkg::*;
#(
  parameter int SEQ     = SEQ_LEN,
  parameter int H       = HIDDEN,
  parameter int KS      = KERNEL,
  parameter int NF      = FILTERS,
  localparam int C      = 2 * H,
  localparam int OUTN   = SEQ - KS + 1,
  localparam int WDEPTH = KS * C + 1,
  localparam int AW     = $clog2(WDEPTH),
  localparam int FW     = (NF > 1) ? $clog2(NF) : 1,
  localparam int HAW    = $clog2(SEQ * H),
  localparam int OW     = (OUTN > 1) ? $clog2(OUTN) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           busy,
  output logic           done,
  // weight write port
  input  logic           w_we,
  input  logic [FW-1:0]  w_filt,
  input  logic [AW-1:0]  w_addr,
  input  data_t          w_data,
  // biLSTM output read ports (forward and backward halves)
  output logic [HAW-1:0] hf_addr,
  input  data_t          hf_data,
  output logic [HAW-1:0] hb_addr,
  input  data_t          hb_data,
  // results
  output logic           y_valid,
  output logic [OW-1:0]  y_idx,
  output data_t          y [NF]
);

  localparam int TW  = $clog2(SEQ);
  localparam int KKW = $clog2(KS + 1);
  localparam int CW  = $clog2(C);

  typedef enum logic [1:0] {S_IDLE, S_MAC, S_DRAIN, S_OUT} state_e;
  state_e state;

  logic [OW-1:0]  p;
  logic [KKW-1:0] kk;     // tap, KS means the bias word
  logic [CW-1:0]  ch;
  logic [AW-1:0]  wa;

  logic           v1, first1, bias1, bwd1;
  acc_t           acc [NF];

  logic [DATA_W-1:0] w_rd [NF][1];
  logic [AW-1:0]     w_ra [1];
  assign w_ra[0] = wa;

  for (genvar f = 0; f < NF; f++) begin : g_bank
    seq_ram #(.WIDTH(DATA_W), .DEPTH(WDEPTH), .NR(1)) u_w (
      .clk  (clk),
      .we   (w_we && (w_filt == FW'(f))),
      .waddr(w_addr),
      .wdata(w_data),
      .raddr(w_ra),
      .rdata(w_rd[f])
    );
  end

  // hidden-state address of the (tap, channel) pair being issued
  logic [TW-1:0] t_rd;
  logic [HAW-1:0] row;
  always_comb begin
    t_rd    = TW'(int'(p) + ((int'(kk) < KS) ? int'(kk) : 0));
    row     = HAW'(int'(t_rd) * H);
    hf_addr = row + HAW'(ch);
    hb_addr = row + HAW'((int'(ch) >= H) ? int'(ch) - H : 0);
  end

  data_t opnd;
  always_comb begin
    if (bias1)     opnd = ONE;
    else if (bwd1) opnd = hb_data;
    else           opnd = hf_data;
  end

  assign busy    = (state != S_IDLE);
  assign y_valid = (state == S_OUT);
  assign y_idx   = p;
  always_comb begin
    for (int f = 0; f < NF; f++) y[f] = rescale(acc[f]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      p      <= '0;
      kk     <= '0;
      ch     <= '0;
      wa     <= '0;
      v1     <= 1'b0;
      first1 <= 1'b0;
      bias1  <= 1'b0;
      bwd1   <= 1'b0;
      done   <= 1'b0;
      for (int f = 0; f < NF; f++) acc[f] <= '0;
    end else begin
      done <= 1'b0;
      v1   <= 1'b0;

      if (v1) begin
        for (int f = 0; f < NF; f++) begin
          if (first1) acc[f] <= acc_t'(data_t'(w_rd[f][0])) * acc_t'(opnd);
          else        acc[f] <= acc[f] + acc_t'(data_t'(w_rd[f][0])) * acc_t'(opnd);
        end
      end

      unique case (state)
        S_IDLE: begin
          if (start) begin
            state <= S_MAC;
            p     <= '0;
            kk    <= '0;
            ch    <= '0;
            wa    <= '0;
          end
        end
        S_MAC: begin
          v1     <= 1'b1;
          first1 <= (wa == '0);
          bias1  <= (int'(kk) == KS);
          bwd1   <= (int'(ch) >= H);
          if (int'(kk) == KS) begin
            wa    <= '0;
            kk    <= '0;
            ch    <= '0;
            state <= S_DRAIN;
          end else begin
            wa <= wa + 1'b1;
            if (int'(ch) == C - 1) begin
              ch <= '0;
              kk <= kk + 1'b1;
            end else begin
              ch <= ch + 1'b1;
            end
          end
        end
        S_DRAIN: state <= S_OUT;
        S_OUT: begin
          if (int'(p) == OUTN - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            p     <= p + 1'b1;
            state <= S_MAC;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // weights may only be rewritten while the engine is idle
  assert property (@(posedge clk) disable iff (!rst_n) w_we |-> (state == S_IDLE));

endmodule

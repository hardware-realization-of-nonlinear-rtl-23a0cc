// lstm_dir: one direction of the biLSTM layer.
//
// Runs an LSTM with IN inputs and H hidden units over a window of SEQ
// symbols, from t = 0 upward (REVERSE = 0) or from t = SEQ-1 downward
// (REVERSE = 1); the two directions together form the biLSTM. h and c start
// at zero for every window. For each time step and each unit j it forms the
// four gate pre-activations
//     pre_g = sum_k W_g[j][k] * v[k],   v = (x_t[0..IN-1], h_{t-1}[0..H-1], 1)
// with four multiply-accumulate lanes (one per gate) that consume one column
// k per clock, then passes them to lstm_cell and stores c_j and h_j. The last
// column holds the bias (multiplied by 1.0). The new h vector becomes h_{t-1}
// only after all H units of the step are done (double-buffered).
//
// Weight memory: four seq_ram banks, one per gate (i, f, g, o), each of
// H*(IN+H+1) words; word j*(IN+H+1)+k holds W_g[j][k]. They are written
// through w_we/w_gate/w_addr/w_data while the engine is idle.
//
// Interface: start (pulse, when idle) begins a window; busy is high while it
// runs; done pulses once at its end. x_addr selects the input symbol, whose
// IN features arrive on x_data one cycle later (a synchronous-read buffer).
// Each finished h_j is written out on h_we/h_t/h_j/h_data.
// Timing: H*(IN+H+4) cycles per time step: IN+H+1 MAC issue cycles, one to
// drain the MAC pipeline, one in lstm_cell and one write-back; SEQ*H*(IN+H+4)
// cycles per window (81*35*43 = 121,905 at the defaults).
//
// The sizes (81 steps, 4 inputs, 35 units, two directions) follow the paper;
// the paper does not describe the LSTM hardware, so the serial-over-units,
// four-lane schedule, the memory layout and the handshake are this design's
// choices.
module lstm_dir
  import eq_pkg::*;
#(
  parameter int SEQ     = SEQ_LEN,
  parameter int IN      = N_FEAT,
  parameter int H       = HIDDEN,
  parameter int SEG     = SEGMENTS,
  parameter bit REVERSE = 1'b0,
  localparam int K      = IN + H + 1,
  localparam int WDEPTH = H * K,
  localparam int AW     = $clog2(WDEPTH),
  localparam int TW     = (SEQ > 1) ? $clog2(SEQ) : 1,
  localparam int HW     = (H > 1) ? $clog2(H) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic            busy,
  output logic            done,
  // weight write port
  input  logic            w_we,
  input  logic [1:0]      w_gate,
  input  logic [AW-1:0]   w_addr,
  input  data_t           w_data,
  // input sequence read port
  output logic [TW-1:0]   x_addr,
  input  data_t [IN-1:0]  x_data,
  // activation tables
  input  pwl_seg_t        sig_tab  [SEG],
  input  pwl_seg_t        tanh_tab [SEG],
  // hidden-state output
  output logic            h_we,
  output logic [TW-1:0]   h_t,
  output logic [HW-1:0]   h_j,
  output data_t           h_data
);

  localparam int KW = $clog2(K);

  typedef enum logic [2:0] {S_IDLE, S_MAC, S_DRAIN, S_CELL, S_WB} state_e;
  state_e state;

  logic [TW-1:0] step;
  logic [HW-1:0] j;
  logic [KW-1:0] k;
  logic [AW-1:0] wa;

  // MAC pipeline stage 1
  logic          v1;
  logic [KW-1:0] k1;
  acc_t          acc [N_GATES];

  data_t c_mem [H];
  data_t h_cur [H];
  data_t h_nxt [H];

  // weight banks
  logic [DATA_W-1:0] w_rd [N_GATES][1];
  logic [AW-1:0]     w_ra [1];
  assign w_ra[0] = wa;

  for (genvar g = 0; g < N_GATES; g++) begin : g_bank
    seq_ram #(.WIDTH(DATA_W), .DEPTH(WDEPTH), .NR(1)) u_w (
      .clk  (clk),
      .we   (w_we && (w_gate == 2'(g))),
      .waddr(w_addr),
      .wdata(w_data),
      .raddr(w_ra),
      .rdata(w_rd[g])
    );
  end

  // LSTM cell
  logic  cell_in_valid, cell_out_valid;
  data_t pre [N_GATES];
  data_t cell_c, cell_h;

  always_comb begin
    for (int g = 0; g < N_GATES; g++) pre[g] = rescale(acc[g]);
  end
  assign cell_in_valid = (state == S_CELL);

  lstm_cell #(.SEG(SEG)) u_cell (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (cell_in_valid),
    .pre      (pre),
    .c_prev   (c_mem[j]),
    .sig_tab  (sig_tab),
    .tanh_tab (tanh_tab),
    .out_valid(cell_out_valid),
    .c_new    (cell_c),
    .h_new    (cell_h)
  );

  assign x_addr = REVERSE ? TW'(SEQ - 1 - int'(step)) : step;
  assign busy   = (state != S_IDLE);
  assign h_we   = (state == S_WB);
  assign h_t    = x_addr;
  assign h_j    = j;
  assign h_data = cell_h;

  // operand of MAC stage 1
  data_t opnd;
  always_comb begin
    if (int'(k1) < IN)          opnd = data_t'(x_data[k1]);
    else if (int'(k1) < IN + H) opnd = h_cur[int'(k1) - IN];
    else                        opnd = ONE;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      step  <= '0;
      j     <= '0;
      k     <= '0;
      wa    <= '0;
      v1    <= 1'b0;
      k1    <= '0;
      done  <= 1'b0;
      for (int g = 0; g < N_GATES; g++) acc[g] <= '0;
      for (int i = 0; i < H; i++) begin
        c_mem[i] <= '0;
        h_cur[i] <= '0;
        h_nxt[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      v1   <= 1'b0;

      // MAC stage 1: weights and operand are available
      if (v1) begin
        for (int g = 0; g < N_GATES; g++) begin
          if (k1 == '0) acc[g] <= acc_t'(data_t'(w_rd[g][0])) * acc_t'(opnd);
          else          acc[g] <= acc[g] + acc_t'(data_t'(w_rd[g][0])) * acc_t'(opnd);
        end
      end

      unique case (state)
        S_IDLE: begin
          if (start) begin
            state <= S_MAC;
            step  <= '0;
            j     <= '0;
            k     <= '0;
            wa    <= '0;
            for (int i = 0; i < H; i++) begin
              c_mem[i] <= '0;
              h_cur[i] <= '0;
              h_nxt[i] <= '0;
            end
          end
        end
        S_MAC: begin
          v1 <= 1'b1;
          k1 <= k;
          wa <= wa + 1'b1;
          if (int'(k) == K - 1) begin
            k     <= '0;
            state <= S_DRAIN;
          end else begin
            k <= k + 1'b1;
          end
        end
        S_DRAIN: state <= S_CELL;
        S_CELL:  state <= S_WB;
        S_WB: begin
          c_mem[j] <= cell_c;
          h_nxt[j] <= cell_h;
          if (int'(j) == H - 1) begin
            for (int i = 0; i < H; i++) h_cur[i] <= (i == H - 1) ? cell_h : h_nxt[i];
            j  <= '0;
            wa <= '0;
            if (int'(step) == SEQ - 1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              step  <= step + 1'b1;
              state <= S_MAC;
            end
          end else begin
            j     <= j + 1'b1;
            state <= S_MAC;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the cell result must be ready exactly in the write-back cycle
  assert property (@(posedge clk) disable iff (!rst_n) (state == S_WB) |-> cell_out_valid);
  // weights may only be rewritten while the engine is idle
  assert property (@(posedge clk) disable iff (!rst_n) w_we |-> (state == S_IDLE));

endmodule

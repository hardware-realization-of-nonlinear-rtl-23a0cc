// eq_pkg: types and constants shared by the biLSTM+CNN optical equalizer.
//
// Numbers follow the equalizer described for this design: an input window
// of 81 dual-polarisation symbols (4 real features XI, XQ, YI, YQ), one
// biLSTM layer of 35 hidden units per direction, a linear 1-D convolution
// with kernel 21, no padding and 2 filters, giving 61 output symbols (XI, XQ),
// and 3-segment piecewise-linear (PWL) sigmoid and tanh.
//
// The fixed-point format is this design's own choice: every activation,
// weight and coefficient is a 16-bit signed two's-complement number with 12
// fraction bits (Q3.12, range [-8, 8), step 1/4096). Products are kept at
// full precision in 40-bit accumulators and brought back to Q3.12 by an
// arithmetic right shift of 12 (rounding toward minus infinity) followed by
// saturation.
package eq_pkg;

  localparam int DATA_W   = 16;               // word width (assumed)
  localparam int FRAC     = 12;               // fraction bits (assumed)
  localparam int ACC_W    = 40;               // accumulator width (assumed)

  localparam int SEQ_LEN  = 81;               // input symbols per window
  localparam int N_FEAT   = 4;                // XI, XQ, YI, YQ
  localparam int HIDDEN   = 35;               // LSTM hidden units per direction
  localparam int KERNEL   = 21;               // CNN kernel size
  localparam int FILTERS  = 2;                // CNN filters (I and Q)
  localparam int OUT_LEN  = SEQ_LEN - KERNEL + 1;  // 61 output symbols
  localparam int SEGMENTS = 3;                // PWL segments per function
  localparam int N_GATES  = 4;                // LSTM gates i, f, g, o

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  localparam data_t ONE      = data_t'(1 << FRAC);
  localparam data_t DATA_MAX = data_t'((1 << (DATA_W-1)) - 1);
  localparam data_t DATA_MIN = data_t'(-(1 << (DATA_W-1)));

  // One linear segment of a PWL function: it applies for lo <= x < next lo.
  // The lo field of segment 0 is not used (segment 0 extends to -infinity).
  typedef struct packed {
    data_t lo;
    data_t slope;
    data_t icpt;
  } pwl_seg_t;

  // Field selector for writing a segment coefficient.
  typedef enum logic [1:0] {
    PWL_LO    = 2'd0,
    PWL_SLOPE = 2'd1,
    PWL_ICPT  = 2'd2
  } pwl_field_e;

  // LSTM gate order inside the weight memories.
  typedef enum logic [1:0] {
    GATE_I = 2'd0,
    GATE_F = 2'd1,
    GATE_G = 2'd2,
    GATE_O = 2'd3
  } gate_e;

  // Configuration write bus of the top level.
  typedef enum logic [2:0] {
    CFG_LSTM_FWD = 3'd0,   // bank = gate, addr = unit*(N_FEAT+HIDDEN+1) + column
    CFG_LSTM_BWD = 3'd1,
    CFG_CNN      = 3'd2,   // bank = filter, addr = tap*2*HIDDEN + channel
    CFG_PWL_SIG  = 3'd3,   // bank = pwl_field_e, addr = segment
    CFG_PWL_TANH = 3'd4
  } cfg_sel_e;

  typedef struct packed {
    logic        we;
    cfg_sel_e    sel;
    logic [1:0]  bank;
    logic [15:0] addr;
    data_t       data;
  } cfg_t;

  // Saturate an accumulator-wide value to the data word.
  function automatic data_t sat(input acc_t v);
    if (v > acc_t'(DATA_MAX))      return DATA_MAX;
    else if (v < acc_t'(DATA_MIN)) return DATA_MIN;
    else                           return data_t'(v);
  endfunction

  // Bring a sum of Q3.12 x Q3.12 products (24 fraction bits) back to Q3.12.
  function automatic data_t rescale(input acc_t v);
    return sat(v >>> FRAC);
  endfunction

endpackage

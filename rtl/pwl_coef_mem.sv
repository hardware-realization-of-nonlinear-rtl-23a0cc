// pwl_coef_mem: coefficient store of one PWL activation function.
//
// Holds, for each of SEG segments, its lower breakpoint, slope and intercept
// (all Q3.12) in registers, and presents the whole table to any number of
// pwl_eval instances. After reset it holds the hard function the paper uses
// as its 3-segment example: hard tanh (IS_SIGMOID = 0) clamps x to [-1, 1];
// hard sigmoid (IS_SIGMOID = 1) is clamp(x/4 + 1/2, 0, 1), i.e. the tangent
// of the sigmoid at 0, reaching 0 and 1 at x = -2 and x = +2. For SEG > 3 the
// reset table is the same hard function with its sloped part cut into SEG-2
// equal collinear pieces; fitted (or retrained) coefficients are loaded
// through the write port.
//
// Interface: we/field/idx/wdata write one coefficient (field: 0 breakpoint,
// 1 slope, 2 intercept; idx: segment); writes to idx >= SEG are ignored.
// Timing: a write is visible on tab the cycle after it is clocked in.
//
// The paper states that only the segment coefficients are stored. Its
// Fig. 1b draws the 3-segment curves without printing the breakpoints, so
// the reset breakpoints (+-1 for tanh, +-2 for sigmoid) are this design's
// choice, as is the asynchronous active-low reset.
module pwl_coef_mem
  import eq_pkg::*;
#(
  parameter int SEG        = SEGMENTS,
  parameter bit IS_SIGMOID = 1'b0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       we,
  input  pwl_field_e field,
  input  logic [7:0] idx,
  input  data_t      wdata,
  output pwl_seg_t   tab [SEG]
);

  localparam int SW = (SEG > 1) ? $clog2(SEG) : 1;

  // Reset value of segment s: the hard function from (X0, Y0) to (X1, Y1).
  function automatic pwl_seg_t default_seg(input int s);
    int x0, x1, y0, y1, n, slope;
    pwl_seg_t r;
    x0 = IS_SIGMOID ? -2 * int'(ONE) : -int'(ONE);
    x1 = IS_SIGMOID ?  2 * int'(ONE) :  int'(ONE);
    y0 = IS_SIGMOID ?  0             : -int'(ONE);
    y1 = int'(ONE);
    n  = SEG - 2;
    slope = ((y1 - y0) * int'(ONE)) / (x1 - x0);
    if (s == 0) begin
      r.lo = DATA_MIN;  r.slope = '0;  r.icpt = data_t'(y0);
    end else if (s == SEG - 1) begin
      r.lo = data_t'(x1); r.slope = '0; r.icpt = data_t'(y1);
    end else begin
      r.lo    = data_t'(x0 + ((s - 1) * (x1 - x0)) / n);
      r.slope = data_t'(slope);
      r.icpt  = data_t'(y0 - ((slope * x0) >>> FRAC));
    end
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SEG; s++) tab[s] <= default_seg(s);
    end else if (we && (int'(idx) < SEG)) begin
      unique case (field)
        PWL_LO:    tab[SW'(idx)].lo    <= wdata;
        PWL_SLOPE: tab[SW'(idx)].slope <= wdata;
        PWL_ICPT:  tab[SW'(idx)].icpt  <= wdata;
        default: ;
      endcase
    end
  end

endmodule

// pwl_eval: piecewise-linear (PWL) function evaluator.
//
// A PWL approximation replaces a nonlinear activation (sigmoid, tanh) by SEG
// straight segments. Only the coefficients of the segments are stored (see
// pwl_coef_mem); this block picks the segment that contains x and returns
//     y = sat( (slope[s] * x) >>> FRAC + icpt[s] )
// where s is the highest segment index whose lower breakpoint lo[s] <= x
// (segment 0 covers everything below lo[1]). Breakpoints must be ascending.
// With SEG = 3 and the reset tables of pwl_coef_mem this gives the "hard
// tanh" clamp(x, -1, 1) and the "hard sigmoid" clamp(x/4 + 1/2, 0, 1).
//
// Interface: x (Q3.12), tab (segment table), y (Q3.12).
// Timing: purely combinational; the caller registers the result.
//
// The PWL principle, the segment counts (3 chosen, 5/7/9 evaluated) and the
// stored-coefficient organisation follow the paper. The comparator-chain
// segment search, the single slope multiplier and rounding toward minus
// infinity are this design's choices; the shift-and-add variant without any
// multiplier is not built.
module pwl_eval
  import eq_pkg::*;
#(
  parameter int SEG = SEGMENTS
) (
  input  data_t    x,
  input  pwl_seg_t tab [SEG],
  output data_t    y
);

  localparam int SW = (SEG > 1) ? $clog2(SEG) : 1;

  logic [SW-1:0] s;
  acc_t          prod;

  always_comb begin
    s = '0;
    for (int i = 1; i < SEG; i++) begin
      if (x >= tab[i].lo) s = SW'(i);
    end
    prod = acc_t'(tab[s].slope) * acc_t'(x);
    y    = sat((prod >>> FRAC) + acc_t'(tab[s].icpt));
  end

endmodule

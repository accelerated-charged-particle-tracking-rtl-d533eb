// sigmoid_plan: logistic sigmoid 1/(1+exp(-x)) on one <16,6> fixed-point value.
//
// The classifier's last layer ends in a sigmoid so that its output reads as
// the probability that an edge is a true track segment.  How the sigmoid is
// built in hardware is this design's choice: the piecewise-linear "PLAN"
// approximation, whose slopes are powers of two, so it needs only shifts,
// adds and comparators and no table:
//     |x| >= 5          : y = 1
//     2.375 <= |x| < 5  : y = |x|/32 + 0.84375
//     1 <= |x| < 2.375  : y = |x|/8  + 0.625
//     |x| < 1           : y = |x|/4  + 0.5
//     x < 0             : y = 1 - y(|x|)
// Its largest error against the true sigmoid is below 0.02.
// Purely combinational; output in the same <16,6> format, in [0, 1].
module sigmoid_plan
  import gnn_pkg::*;
(
  input  fx_t x,
  output fx_t y
);
  localparam int unsigned T5    = 5 << FX_F;              // 5.0
  localparam int unsigned T2375 = (19 << FX_F) / 8;       // 2.375
  localparam int unsigned T1    = 1 << FX_F;              // 1.0
  localparam int unsigned C84   = (27 << FX_F) / 32;      // 0.84375
  localparam int unsigned C625  = (5 << FX_F) / 8;        // 0.625
  localparam int unsigned C5    = (1 << FX_F) / 2;        // 0.5

  logic [FX_W:0] ax;     // |x|, one bit wider so that |FX_MIN| fits
  logic [FX_W:0] ypos;   // y(|x|)

  always_comb begin
    ax = x[FX_W-1] ? (FX_W+1)'(-$signed({x[FX_W-1], x})) : {1'b0, x};
    if (ax >= (FX_W+1)'(T5))
      ypos = (FX_W+1)'(T1);
    else if (ax >= (FX_W+1)'(T2375))
      ypos = (ax >> 5) + (FX_W+1)'(C84);
    else if (ax >= (FX_W+1)'(T1))
      ypos = (ax >> 3) + (FX_W+1)'(C625);
    else
      ypos = (ax >> 2) + (FX_W+1)'(C5);
    y = x[FX_W-1] ? fx_t'((FX_W+1)'(T1) - ypos) : fx_t'(ypos);
  end
endmodule

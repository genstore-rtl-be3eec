// gs_chain_pe: the Chaining Processing Element of GenStore-NM.
//
// Evaluates one term of the chaining recurrence
//   f(i) = max( max_j { f(j) + alpha(j,i) - beta(j,i) }, w_i )
// for one predecessor seed j of seed i, with the datapath the paper draws:
//   dx = x_i - x_j, dy = y_i - y_j                   (reference / read distance)
//   alpha = min(min(dx, dy), w_i)                     (match score)
//   g = |dx - dy|,  beta = (g >> 3) + (log2(g) >> 1)  (gap penalty, shifts
//                                                      instead of multiplies)
//   score = f(j) + alpha - beta
// log2 is the index of the highest set bit (0 for g = 0 or 1). The sum is kept
// wide and saturated to the SCORE_W-bit signed score. colinear reports dx > 0 and
// dy > 0, i.e. seed j can precede seed i in a chain; the caller ignores the score
// otherwise. The PE is combinational; the chaining filter registers its result.
//
// From the paper: the operators and shift amounts (>>3, log2, >>1, MIN, ABS) and
// the 16-bit score. Own choices: the colinearity flag (as in minimap2, not in the
// paper's figure), saturation and operand widths.
module gs_chain_pe
  import gs_pkg::*;
#(
  parameter int unsigned PW = POS_W,
  parameter int unsigned SW = SCORE_W
) (
  input  logic [PW-1:0]        x_i,
  input  logic [PW-1:0]        y_i,
  input  logic [PW-1:0]        x_j,
  input  logic [PW-1:0]        y_j,
  input  logic [7:0]           w_i,
  input  logic signed [SW-1:0] f_j,
  output logic signed [SW-1:0] score,
  output logic                 colinear
);

  localparam int unsigned DW = PW + 2;   // signed distances and their difference

  logic signed [DW-1:0] dx, dy, dmin, alpha, diff;
  logic        [DW-1:0] gap;
  logic        [$clog2(DW)-1:0] lg;
  logic signed [DW+1:0] beta, sum;

  always_comb begin
    dx   = DW'($signed({1'b0, x_i})) - DW'($signed({1'b0, x_j}));
    dy   = DW'($signed({1'b0, y_i})) - DW'($signed({1'b0, y_j}));
    dmin = (dx < dy) ? dx : dy;
    alpha = (dmin < DW'($signed({1'b0, w_i}))) ? dmin : DW'($signed({1'b0, w_i}));
    diff = dx - dy;
    gap  = diff[DW-1] ? DW'(-diff) : DW'(diff);
    lg   = '0;
    for (int b = 0; b < int'(DW); b++)
      if (gap[b]) lg = ($clog2(DW))'(b);
    beta = $signed({2'b00, gap >> 3}) + $signed((DW+2)'(lg >> 1));
    sum  = (DW+2)'(f_j) + (DW+2)'(alpha) - beta;
    if (sum > (DW+2)'((2**(SW-1)) - 1))
      score = SW'((2**(SW-1)) - 1);
    else if (sum < -(DW+2)'(2**(SW-1)))
      score = SW'(-(2**(SW-1)));
    else
      score = SW'(sum);
    colinear = (dx > 0) && (dy > 0);
  end

endmodule

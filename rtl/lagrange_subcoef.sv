// lagrange_subcoef -- Lagrange Sub-coefficient Computation Block (the paper's
// Fig. 9 and Eq. (14)): Z(i,m) = ((x + dt) - x_m) * W(i,m).
//
// As in the figure it is an adder (x + dt), a subtractor (minus x_m) and a
// multiplier (times W(i,m)). x is the sample index being corrected (integer),
// dt the measurement delay in steps (unsigned Q8.12), x_m the absolute
// position of window point m (signed integer) and W(i,m) the weight from the
// W lookup table (signed Q1.12). The window is chosen around x + dt, so the
// difference always lies in -8..+8 and is kept as signed Q5.12; the product
// is rounded to 12 fraction bits (the paper keeps 12-bit fractions).
// Purely combinational.
module lagrange_subcoef
  import dfc_pkg::*;
(
  input  idx_t  x,
  input  step_t dt,
  input  xm_t   xm,
  input  w_t    w,
  output z_t    z
);
  pos_t                         sum;     // adder
  logic signed [POS_W+1:0]      diff_w;  // subtractor, full width
  logic signed [DIFF_W-1:0]     diff;
  logic signed [DIFF_W+W_W-1:0] p;

  always_comb begin
    sum    = pos_t'({x, {FRAC{1'b0}}}) + pos_t'(dt);
    diff_w = $signed({2'b00, sum}) - ((POS_W+2)'(xm) <<< FRAC);
    diff   = diff_w[DIFF_W-1:0];
    p      = diff * w;                           // multiplier
    p      = p + (DIFF_W+W_W)'(1 << (FRAC - 1)); // round to nearest
    z      = z_t'(p >>> FRAC);
  end
endmodule

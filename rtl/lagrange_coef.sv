// lagrange_coef -- Lagrange Coefficient Computation Block (the paper's Fig. 8
// and Eq. (13)): l_I(x + dt) = product over m != I of Z(I,m).
//
// NPTS Lagrange Sub-coefficient blocks compute all Z(I,m) at once, each with
// its own W(I,m) from a W lookup table. The slot m = I is the 1.0 of the
// product (no factor), and the slots beyond NPTS are padded with 1.0 so that
// a balanced tree of multipliers fits: for 15 points the 16 slots are
// multiplied in four layers (8, 4, 2 and 1 multipliers), the paper's
// First_Layer_Multiplier_1..8 to Forth_Layer_Multiplier. Every product is
// rounded to 12 fraction bits and held in a 32-bit signed word.
//
// Timing: fully pipelined, one new (x, dt, base) per clock. The Z values are
// registered, then each multiplier layer, so l_I appears LAYERS + 1 clocks
// after its inputs. The pipeline registers are this design's choice; the
// paper does not say where registers sit.
//
// base is the absolute position of window point 0; point m lies at base + m.
module lagrange_coef
  import dfc_pkg::*;
#(
  parameter int unsigned I = 0   // coefficient index inside the window
) (
  input  logic  clk,
  input  idx_t  x,
  input  step_t dt,
  input  xm_t   base,
  output prod_t coef
);
  localparam int unsigned LAYERS = $clog2(NPTS);
  localparam int unsigned SLOTS  = 1 << LAYERS;

  z_t    z   [NPTS];
  w_t    w   [NPTS];
  prod_t lvl [LAYERS+1][SLOTS];

  for (genvar m = 0; m < NPTS; m++) begin : g_sub
    w_lut #(.N(NPTS)) u_w (.i(4'(I)), .m(4'(m)), .w(w[m]));
    lagrange_subcoef u_sub (
      .x, .dt, .xm(base + xm_t'(m)), .w(w[m]), .z(z[m])
    );
  end

  // Z registers (tree layer 0), then multiplier layers 1..LAYERS
  always_ff @(posedge clk) begin
    for (int s = 0; s < int'(SLOTS); s++) begin
      if (s < int'(NPTS) && s != int'(I)) lvl[0][s] <= prod_t'(z[s]);
      else                                lvl[0][s] <= prod_t'(ONE);
    end
    for (int l = 1; l <= int'(LAYERS); l++)
      for (int k = 0; k < int'(SLOTS); k++)
        if (k < int'(SLOTS >> l)) lvl[l][k] <= rq_mul(lvl[l-1][2*k], lvl[l-1][2*k+1]);
        else                      lvl[l][k] <= '0;
  end

  assign coef = lvl[LAYERS][0];

  initial begin
    assert (I < NPTS) else $fatal(1, "lagrange_coef: I out of range");
  end
endmodule

// w_lut -- W lookup table: the pre-processed weight matrix of the paper's
// Eq. (10), W(i,m) = 1 / (x_i - x_m).
//
// The interpolation points inside a window are one sample step apart, so
// x_i - x_m = i - m and the table depends only on the point indices. It is
// held as a ROM of NPTS x NPTS signed Q1.12 words filled at elaboration time
// with round(4096 / (i - m)); the diagonal (i = m, never used) holds 0.
// Replacing the divisions of the Lagrange coefficients by this table is the
// paper's idea; the word format and rounding are this design's choice.
//
// Interface: row index i and column index m in, W(i,m) out, combinational.
module w_lut
  import dfc_pkg::*;
#(
  parameter int unsigned N = NPTS   // points per interpolation window
) (
  input  logic [3:0] i,
  input  logic [3:0] m,
  output w_t         w
);
  w_t rom [16][16];

  for (genvar a = 0; a < 16; a++) begin : g_row
    for (genvar c = 0; c < 16; c++) begin : g_col
      localparam w_t V = (a < N && c < N) ? w_value(a, c) : w_t'(0);
      assign rom[a][c] = V;
    end
  end

  assign w = rom[i][m];

  initial begin
    assert (N >= 2 && N <= 16) else $fatal(1, "w_lut: N must be 2..16");
  end
endmodule

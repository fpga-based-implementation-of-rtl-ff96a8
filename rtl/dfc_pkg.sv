// dfc_pkg -- shared constants, number formats and helper functions of the
// data frame correction (DFC) system.
//
// The DFC system runs from one 100 MHz clock. One power-line period (50 Hz,
// 20 ms) is 2,000,000 clocks and holds a frame of 256 measured samples, so one
// sample step is 7,812.5 clocks (78,125 ns). Those numbers and the 12 fraction
// bits of all interpolation arithmetic follow the paper. The choices made
// here where the paper gives no number are the sample word (16-bit signed,
// 12 fraction bits, range -8..+8) and the width of the products inside the
// Lagrange coefficient multiplier tree (32-bit signed, 12 fraction bits).
package dfc_pkg;

  // ---- timing of the merging-unit frame ----------------------------------
  localparam int unsigned CLK_PER_FRAME   = 2_000_000; // 20 ms at 100 MHz
  localparam int unsigned SAMPLES         = 256;       // samples per frame (IEC 61850-9-2)
  localparam int unsigned SP_PER_PPS      = 50;        // SP pulses between two 1PPS pulses
  localparam int unsigned SCG_W           = 21;        // SCG counter width (Fig. 4)
  localparam int unsigned PRIM_W          = 25;        // primary counter / Register_1 width
  localparam int unsigned SYNC_W          = 6;         // synchronization counter width

  // ---- interpolation number formats --------------------------------------
  localparam int unsigned FRAC    = 12;   // fraction bits kept in every result
  localparam int unsigned NPTS    = 15;   // Lagrange points (coefficient blocks)
  localparam int unsigned DATA_W  = 16;   // measured / actual data, signed Q3.12
  localparam int unsigned IDX_W   = 8;    // sample index inside the frame
  localparam int unsigned STEP_W  = IDX_W + FRAC;      // delay in steps, unsigned Q8.12
  localparam int unsigned POS_W   = IDX_W + 1 + FRAC;  // x + dt, unsigned Q9.12
  localparam int unsigned XM_W    = IDX_W + 3;         // absolute window position, signed
  localparam int unsigned DIFF_W  = 6 + FRAC;          // (x + dt) - x_m, signed Q5.12
  localparam int unsigned W_W     = 2 + FRAC;          // W(i,m) = 1/(i-m), signed Q1.12
  localparam int unsigned Z_W     = 6 + FRAC;          // Z(i,m), signed Q5.12
  localparam int unsigned PROD_W  = 32;                // multiplier-tree word, signed Q19.12

  localparam int ONE = 1 << FRAC;                      // 1.0 in every Q.12 format

  localparam int unsigned HALF_WIN       = (NPTS - 1) / 2;   // points before x + dt
  localparam int unsigned TREE_LAYERS    = $clog2(NPTS);     // multiplier layers (4)
  // clocks from the start pulse to the first corrected sample
  localparam int unsigned INTERP_LATENCY = TREE_LAYERS + 5;

  typedef logic signed [DATA_W-1:0] sample_t;
  typedef logic        [IDX_W-1:0]  idx_t;
  typedef logic        [STEP_W-1:0] step_t;
  typedef logic        [POS_W-1:0]  pos_t;
  typedef logic signed [XM_W-1:0]   xm_t;
  typedef logic signed [W_W-1:0]    w_t;
  typedef logic signed [Z_W-1:0]    z_t;
  typedef logic signed [PROD_W-1:0] prod_t;

  // Round-to-nearest of a product that carries 2*FRAC fraction bits back to
  // FRAC fraction bits (arithmetic shift with half-LSB bias).
  function automatic prod_t rq_mul(input prod_t a, input prod_t b);
    logic signed [2*PROD_W-1:0] p;
    p = a * b;
    p = p + (2*PROD_W)'(1 << (FRAC - 1));
    return prod_t'(p >>> FRAC);
  endfunction

  // W(i,m) = round(2^FRAC / (i - m)), 0 on the diagonal (never used there).
  function automatic w_t w_value(input int i, input int m);
    int d, q;
    d = i - m;
    // symmetric rounding of ONE/d
    if (d > 0)      q = (ONE + d / 2) / d;
    else if (d < 0) q = -((ONE + (-d) / 2) / (-d));
    else            q = 0;
    return w_t'(q);
  endfunction

endpackage

// interpolation_block -- Interpolation block (the paper's Fig. 7 and
// Eq. (12)): re-frames a stored measured frame by the measurement delay,
//   A(x) = A_measured(x + dt) = sum over i of y_i * l_i(x + dt),
// for every sample index x = 0..255 of the frame.
//
// Structure, following the paper: the Memory Divider stores the frame from
// the merging unit; NPTS (15) Lagrange Coefficient Computation Blocks compute
// l_1..l_15 in parallel from x, dt and the W lookup table; Multiplier_i forms
// y_i * l_i; the Adder Block sums the 15 products. The time tag mapper turns
// the delay from clocks into sample steps (Eq. (9)).
//
// This design's own choices, where the paper says nothing:
//  * The window: the 15 points are the samples floor(x + dt) - 7 ..
//    floor(x + dt) + 7, taken modulo 256 (the frame is one full period).
//    Inside the window the points are one step apart, so W depends only on
//    the point indices.
//  * Control: a one-clock start pulse (Register_1 loaded) captures the delay
//    and launches x = 0..255, one per clock; a new start restarts the run.
//  * Pipelining: one corrected sample per clock; the first leaves
//    INTERP_LATENCY (9) clocks after start, the last 255 clocks later.
//
// Outputs: out_valid / out_idx / out_data (signed Q3.12) per corrected
// sample, busy while a frame is being corrected, dt_step the delay in steps.
module interpolation_block
  import dfc_pkg::*;
#(
  parameter int unsigned CLK_PER_FRAME_P = CLK_PER_FRAME
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              mu_valid,     // measured sample from the MU
  input  sample_t           mu_data,
  input  logic              drdy,         // end of the MU frame
  input  logic              start,        // measurement delay is ready
  input  logic [PRIM_W-1:0] meas_delay,   // in clocks
  output logic              out_valid,
  output idx_t              out_idx,
  output sample_t           out_data,
  output logic              busy,
  output step_t             dt_step
);
  localparam int unsigned DV = TREE_LAYERS + 1;  // valid/index delay to the multipliers

  // ---- time tag mapping and x sequencer ----------------------------------
  step_t dt_map, dt_q;
  logic  running;
  idx_t  xcnt;

  time_tag_mapper #(.CLK_PER_FRAME_P(CLK_PER_FRAME_P)) u_map (
    .delay_clk(meas_delay), .delay_step(dt_map)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      running <= 1'b0;
      xcnt    <= '0;
      dt_q    <= '0;
    end else if (start) begin
      running <= 1'b1;
      xcnt    <= '0;
      dt_q    <= dt_map;
    end else if (running) begin
      xcnt <= xcnt + idx_t'(1);
      if (xcnt == idx_t'(SAMPLES - 1)) running <= 1'b0;
    end
  end

  assign dt_step = dt_q;

  // ---- stage 1: x, dt and window base ------------------------------------
  pos_t  u0;
  logic  s1_valid;
  idx_t  s1_x;
  step_t s1_dt;
  xm_t   s1_base;

  assign u0 = pos_t'({xcnt, {FRAC{1'b0}}}) + pos_t'(dt_q);

  always_ff @(posedge clk) begin
    if (rst) s1_valid <= 1'b0;
    else     s1_valid <= running;
    s1_x    <= xcnt;
    s1_dt   <= dt_q;
    s1_base <= xm_t'(u0 >> FRAC) - xm_t'(HALF_WIN);
  end

  // ---- Lagrange Coefficient Computation Blocks 1..NPTS -------------------
  prod_t coef [NPTS];

  for (genvar i = 0; i < NPTS; i++) begin : g_coef
    lagrange_coef #(.I(i)) u_coef (
      .clk, .x(s1_x), .dt(s1_dt), .base(s1_base), .coef(coef[i])
    );
  end

  // ---- Memory Divider, read so that y meets l at the multipliers ----------
  xm_t     base_sr [TREE_LAYERS];
  sample_t y [NPTS];
  idx_t    wr_ptr;

  always_ff @(posedge clk) begin
    base_sr[0] <= s1_base;
    for (int k = 1; k < int'(TREE_LAYERS); k++) base_sr[k] <= base_sr[k-1];
  end

  memory_divider u_mem (
    .clk, .rst, .wr_valid(mu_valid), .wr_data(mu_data), .drdy,
    .base(base_sr[TREE_LAYERS-1]), .y, .wr_ptr
  );

  // ---- valid / index pipeline --------------------------------------------
  logic v_sr [DV];
  idx_t x_sr [DV];

  always_ff @(posedge clk) begin
    if (rst) for (int k = 0; k < int'(DV); k++) v_sr[k] <= 1'b0;
    else begin
      v_sr[0] <= s1_valid;
      for (int k = 1; k < int'(DV); k++) v_sr[k] <= v_sr[k-1];
    end
    x_sr[0] <= s1_x;
    for (int k = 1; k < int'(DV); k++) x_sr[k] <= x_sr[k-1];
  end

  // ---- Multiplier_1..NPTS -------------------------------------------------
  prod_t mul [NPTS];
  logic  mul_valid;
  idx_t  mul_x;

  always_ff @(posedge clk) begin
    for (int i = 0; i < int'(NPTS); i++) mul[i] <= rq_mul(coef[i], prod_t'(y[i]));
    mul_x <= x_sr[DV-1];
    if (rst) mul_valid <= 1'b0;
    else     mul_valid <= v_sr[DV-1];
  end

  // ---- Adder Block ---------------------------------------------------------
  adder_block u_add (
    .clk, .rst, .in_valid(mul_valid), .terms(mul), .out_valid, .sum(out_data)
  );

  always_ff @(posedge clk) out_idx <= mul_x;

  always_comb begin
    busy = running | s1_valid | mul_valid | out_valid;
    for (int k = 0; k < int'(DV); k++) busy |= v_sr[k];
  end
endmodule

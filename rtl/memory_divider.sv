// memory_divider -- Memory Divider of the interpolation block (the paper's
// Fig. 7): stores the measured data frame coming from the merging unit and
// hands the measured data of the current interpolation window, point m to
// Multiplier_m, all at once.
//
// Write side: each wr_valid writes wr_data at the write pointer, which then
// advances by one; drdy (the merging unit's end-of-frame signal) returns the
// pointer to 0 after any write in the same cycle. So sample k of a frame
// lands at address k, provided the merging unit delivers 256 samples between
// two DRDYs.
// Read side: given the absolute position base of window point 0, y[m] is the
// sample at address (base + m) mod 256, one clock later (registered read).
// Wrapping treats the frame as one full signal period.
//
// The paper names the block and its job only; the single 256-entry array,
// the write pointer and the modulo-256 wrap are this design's choices. The
// frame being corrected must not be overwritten before the correction ends
// (256 + 9 clocks, against 7,812 clocks until the next sample at 100 MHz).
module memory_divider
  import dfc_pkg::*;
(
  input  logic    clk,
  input  logic    rst,
  input  logic    wr_valid,
  input  sample_t wr_data,
  input  logic    drdy,
  input  xm_t     base,
  output sample_t y [NPTS],
  output idx_t    wr_ptr
);
  sample_t mem [SAMPLES];

  always_ff @(posedge clk) begin
    if (wr_valid) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst || drdy)   wr_ptr <= '0;
    else if (wr_valid) wr_ptr <= wr_ptr + idx_t'(1);
  end

  always_ff @(posedge clk) begin
    for (int m = 0; m < int'(NPTS); m++)
      y[m] <= mem[idx_t'(base + xm_t'(m))];
  end
endmodule

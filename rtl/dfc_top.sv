// dfc_top -- Data Frame Correction (DFC) system for a merging unit.
//
// A merging unit (MU) samples a power-line signal 256 times per 20 ms period
// but does so late by an unknown measurement delay dt, which shifts every
// sample. This system measures dt against its own sampling checkpoints and
// removes it by re-sampling the stored frame with 15-point Lagrange
// interpolation: A(x) = A_measured(x + dt).
//
// It is the paper's two-block structure: the Measurement Delay Computation
// block (mdc_block) receives DRDY from the MU and 1PPS from GPS; the delay it
// stores in Register_1 starts the Interpolation block (interpolation_block),
// which also receives the measured samples. Sync Status and Data Lost go to
// the supervisory system (SCADA) as plain outputs.
//
// Timing: DRDY in cycle t makes meas_delay valid in t+1 (delay_valid); the
// corrected frame then streams out on actual_valid / actual_idx /
// actual_data, sample 0 at t + 1 + INTERP_LATENCY and one sample per clock.
// MU samples are written in arrival order; DRDY marks the frame's last one.
// The MU, GPS, SCADA and clock source are outside this design.
module dfc_top
  import dfc_pkg::*;
#(
  parameter int unsigned PERIOD       = CLK_PER_FRAME,  // clocks per 20 ms frame
  parameter int unsigned SP_PER_PPS_P = SP_PER_PPS      // frames per 1PPS second
) (
  input  logic              clk,           // 100 MHz
  input  logic              rst,           // synchronous, active high
  // merging unit
  input  logic              drdy,
  input  logic              mu_valid,
  input  sample_t           mu_data,
  // GPS
  input  logic              pps,
  // SCADA
  output logic              sync_status,   // 1 = SP generation fault
  output logic              status_valid,
  output logic              data_lost,
  // observation of the measurement delay
  output logic              sp,
  output logic [PRIM_W-1:0] meas_delay,
  output logic              delay_valid,
  // corrected (actual) data
  output logic              actual_valid,
  output idx_t              actual_idx,
  output sample_t           actual_data,
  output logic              busy
);
  step_t dt_step;

  mdc_block #(.PERIOD(PERIOD), .SP_PER_PPS_P(SP_PER_PPS_P)) u_mdc (
    .clk, .rst, .drdy, .pps, .sp, .meas_delay, .delay_valid, .data_lost,
    .sync_status, .status_valid
  );

  interpolation_block #(.CLK_PER_FRAME_P(PERIOD)) u_interp (
    .clk, .rst, .mu_valid, .mu_data, .drdy, .start(delay_valid),
    .meas_delay, .out_valid(actual_valid), .out_idx(actual_idx),
    .out_data(actual_data), .busy, .dt_step
  );
endmodule

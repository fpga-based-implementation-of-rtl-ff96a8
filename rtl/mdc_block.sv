// mdc_block -- Measurement Delay Computation (MDC) block.
//
// Joins the Sampling Checkpoint Generator (scg_block), the primary counter
// path (primary_counter_block) and the synchronization check (sync_block) as
// in the paper's MDC block diagram: SP from the SCG goes to both the primary
// counter path and the synchronization block; DRDY from the merging unit
// ends a delay measurement; 1PPS from GPS closes each one-second check.
//
// Outputs: meas_delay (clocks from SP to DRDY, valid with the one-clock
// delay_valid pulse), data_lost (one-clock pulse when DRDY did not come
// within a frame), sync_status (1 = SP generation fault, updated at each
// 1PPS edge, status_valid pulse). Latencies are those of the sub-blocks.
module mdc_block
  import dfc_pkg::*;
#(
  parameter int unsigned PERIOD       = CLK_PER_FRAME,  // clocks per frame
  parameter int unsigned SP_PER_PPS_P = SP_PER_PPS      // frames per second
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              drdy,
  input  logic              pps,
  output logic              sp,
  output logic [PRIM_W-1:0] meas_delay,
  output logic              delay_valid,
  output logic              data_lost,
  output logic              sync_status,
  output logic              status_valid
);
  logic [SCG_W-1:0]  scg_count;
  logic [SYNC_W-1:0] sync_count;
  logic              counting;

  scg_block #(.PERIOD(PERIOD), .W(SCG_W)) u_scg (
    .clk, .rst, .sp, .count(scg_count)
  );

  primary_counter_block #(.LIMIT(PERIOD), .W(PRIM_W)) u_primary (
    .clk, .rst, .sp, .drdy, .meas_delay, .delay_valid, .data_lost, .counting
  );

  sync_block #(.SP_PER_PPS_P(SP_PER_PPS_P), .W(SYNC_W)) u_sync (
    .clk, .rst, .sp, .pps, .sync_status, .status_valid, .sync_count
  );
endmodule

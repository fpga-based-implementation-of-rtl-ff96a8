// scg_block -- Sampling Checkpoint Generator (SCG) of the measurement delay
// computation.
//
// A free-running counter counts clock edges. AND_1 is a wide AND of exactly
// those counter bits that are 1 in PERIOD; for PERIOD = 2,000,000 these are
// B7, B10, B15, B17, B18, B19 and B20, as drawn in the paper's MDC
// architecture figure. Because the counter is cleared by the pulse it makes,
// the first value with all those bits set is PERIOD itself, so AND_1 acts as
// "count == PERIOD" and the Sampling Pulse (SP) is one clock wide.
//
// Timing: SP is high for one clock, PERIOD clocks after reset is released
// and then every PERIOD clocks (20 ms at 100 MHz). The synchronous reset
// through SP loads 1 rather than 0 so that the clock edge that clears the
// counter is itself counted; this keeps the period at exactly PERIOD clocks
// and is this design's reading of "the SCG Counter is reset by SP".
//
// Ports: clk, rst (synchronous, active high), sp (Sampling Pulse), count.
module scg_block
  import dfc_pkg::*;
#(
  parameter int unsigned PERIOD = CLK_PER_FRAME,  // clocks per sampling checkpoint
  parameter int unsigned W      = SCG_W           // counter width (21 in the paper)
) (
  input  logic         clk,
  input  logic         rst,
  output logic         sp,
  output logic [W-1:0] count
);
  localparam logic [W-1:0] TAPS = W'(PERIOD);

  // AND_1: every counter bit that is set in PERIOD must be set
  assign sp = &(count | ~TAPS);

  always_ff @(posedge clk) begin
    if (rst)     count <= '0;
    else if (sp) count <= W'(1);
    else         count <= count + W'(1);
  end

  initial begin
    assert (PERIOD >= 2 && 64'(PERIOD) < (64'd1 << W))
      else $fatal(1, "scg_block: PERIOD does not fit the counter");
  end
endmodule

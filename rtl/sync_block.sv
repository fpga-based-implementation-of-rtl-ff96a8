// sync_block -- Synchronization block of the measurement delay computation:
// the 6-bit synchronization counter, AND_2, XOR_1 and D_Flip-flop_1 of the
// paper's MDC architecture figure.
//
// How it works: the counter counts Sampling Pulses (SP) and is cleared by the
// GPS 1PPS pulse. AND_2 is an AND of the counter bits that are 1 in
// SP_PER_PPS; for 50 these are B1, B4 and B5, as printed in the figure.
// XOR_1 combines AND_2 with 1PPS and D_Flip-flop_1 stores the result at each
// 1PPS edge. With 1PPS high at that instant the stored Sync Status is
// NOT(AND_2): 0 when 50 SPs were seen in the last second (SP generation is
// accurate), 1 when not (a fault to report to the supervisory system).
//
// Timing: the 1PPS rising edge is detected on the 100 MHz clock; in the cycle
// it is seen the status is stored, status_valid pulses one clock later with
// the new value, and the counter restarts (at 1 if an SP falls in that same
// cycle). The 1PPS edge must come after the 50th SP of the second.
//
// As in the figure, AND_2 looks only at the tapped bits, so counts that also
// contain them (51, 54, 55, 58, 59, 62, 63) read as accurate too, and the
// counter wraps at 64. Inputs are assumed synchronous to clk.
module sync_block
  import dfc_pkg::*;
#(
  parameter int unsigned SP_PER_PPS_P = SP_PER_PPS,  // expected SPs per second
  parameter int unsigned W            = SYNC_W       // counter width
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         sp,            // Sampling Pulse
  input  logic         pps,           // 1PPS from the GPS module
  output logic         sync_status,   // D_Flip-flop_1: 1 = SP generation fault
  output logic         status_valid,  // sync_status was just updated
  output logic [W-1:0] sync_count
);
  localparam logic [W-1:0] TAPS = W'(SP_PER_PPS_P);

  logic pps_q, pps_rise, and2, xor1;

  assign pps_rise = pps & ~pps_q;
  assign and2     = &(sync_count | ~TAPS);   // AND_2
  assign xor1     = and2 ^ pps;              // XOR_1

  always_ff @(posedge clk) begin
    if (rst) begin
      pps_q        <= 1'b0;
      sync_count   <= '0;
      sync_status  <= 1'b0;
      status_valid <= 1'b0;
    end else begin
      pps_q        <= pps;
      status_valid <= pps_rise;
      if (pps_rise) begin
        sync_status <= xor1;                 // D_Flip-flop_1, clocked by 1PPS
        sync_count  <= sp ? W'(1) : '0;      // reset by 1PPS
      end else if (sp) begin
        sync_count  <= sync_count + W'(1);
      end
    end
  end

  initial begin
    assert (SP_PER_PPS_P >= 1 && 64'(SP_PER_PPS_P) < (64'd1 << W))
      else $fatal(1, "sync_block: SP_PER_PPS_P does not fit the counter");
  end
endmodule

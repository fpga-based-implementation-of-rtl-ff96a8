// primary_counter_block -- Primary Counter path of the measurement delay
// computation: SR_Latch, OR_1, the primary counter, Register_1 and
// D_Flip-flop_2 of the paper's MDC architecture figure.
//
// How it works: the Sampling Pulse (SP) sets the SR latch; while the latch is
// set the primary counter counts clocks. DRDY from the merging unit clears the
// latch, stores the count in Register_1 (the Measurement Delay, in clocks of
// 10 ns) and resets the counter through OR_1. If DRDY does not come within
// LIMIT clocks (one 20 ms frame), the counter's carry out (Data Lost) fires:
// it is registered in D_Flip-flop_2 for the supervisory system and resets the
// counter through OR_1 while the latch stays set, as the paper describes.
//
// Timing: with SP high in clock cycle t0 and DRDY high in cycle t0+d,
// meas_delay becomes d one clock later and delay_valid pulses for one clock.
// DRDY in the same cycle as SP (latch still clear) is taken as a delay of 0.
// data_lost is a one-clock pulse, one clock after the carry.
//
// Own choices: the latch is a clocked SR flip-flop with reset priority, the
// carry fires at LIMIT counted clocks (the text's "beyond the sampling
// period") rather than at the 2^25 overflow a 25-bit counter would give, and
// Register_1 is loaded only when a delay was actually being measured.
module primary_counter_block
  import dfc_pkg::*;
#(
  parameter int unsigned LIMIT = CLK_PER_FRAME,  // data-lost limit in clocks
  parameter int unsigned W     = PRIM_W          // counter / Register_1 width
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         sp,           // Sampling Pulse from the SCG
  input  logic         drdy,         // DRDY from the merging unit
  output logic [W-1:0] meas_delay,   // Register_1
  output logic         delay_valid,  // Register_1 was just loaded
  output logic         data_lost,    // D_Flip-flop_2
  output logic         counting      // Q of the SR latch
);
  logic [W-1:0] cnt;
  logic         carry, or1;

  assign carry = counting && (cnt == W'(LIMIT - 1));
  assign or1   = drdy | carry;

  // SR_Latch (S = SP, R = DRDY)
  always_ff @(posedge clk) begin
    if (rst)       counting <= 1'b0;
    else if (drdy) counting <= 1'b0;
    else if (sp)   counting <= 1'b1;
  end

  // Primary counter, enabled by Q, reset by OR_1
  always_ff @(posedge clk) begin
    if (rst || or1)    cnt <= '0;
    else if (counting) cnt <= cnt + W'(1);
  end

  // Register_1 and D_Flip-flop_2
  always_ff @(posedge clk) begin
    if (rst) begin
      meas_delay  <= '0;
      delay_valid <= 1'b0;
      data_lost   <= 1'b0;
    end else begin
      data_lost   <= carry;
      delay_valid <= 1'b0;
      if (drdy && counting) begin
        meas_delay  <= cnt + W'(1);
        delay_valid <= 1'b1;
      end else if (drdy && sp) begin
        meas_delay  <= '0;
        delay_valid <= 1'b1;
      end
    end
  end

  initial begin
    assert (LIMIT >= 2 && 64'(LIMIT) < (64'd1 << W))
      else $fatal(1, "primary_counter_block: LIMIT does not fit the counter");
  end
endmodule

// time_tag_mapper -- maps the measurement delay from clock cycles to sample
// steps (time tag mapping, the paper's Eq. (9)).
//
// One sample step is CLK_PER_FRAME_P / 256 clocks (78,125 ns = 7,812.5
// clocks at 100 MHz), so the delay in steps is delay_clk * 256 / 2,000,000 =
// delay_clk * 0.000128 (with 10 ns clocks). The paper gives this formula and
// asks for a multiplication instead of a division; here the constant is held
// with 32 + 12 bits of fraction (K = round(256 * 2^32 / CLK_PER_FRAME_P)) and
// the product is rounded to 12 fraction bits.
//
// The result is an unsigned Q8.12 number of steps taken modulo 256 steps,
// that is modulo one frame: the frame covers one full period of the line
// signal, so a shift by a whole frame changes nothing (this design's choice).
// Purely combinational.
module time_tag_mapper
  import dfc_pkg::*;
#(
  parameter int unsigned CLK_PER_FRAME_P = CLK_PER_FRAME
) (
  input  logic [PRIM_W-1:0] delay_clk,   // delay in clocks (Register_1)
  output step_t             delay_step   // delay in sample steps, Q8.12
);
  localparam int unsigned SH = 32;
  localparam logic [63:0] K =
      ((64'(SAMPLES) << (FRAC + SH)) + 64'(CLK_PER_FRAME_P / 2)) / 64'(CLK_PER_FRAME_P);

  logic [63:0] prod, rounded;

  always_comb begin
    prod       = 64'(delay_clk) * K;
    rounded    = (prod + (64'd1 << (SH - 1))) >> SH;
    delay_step = rounded[STEP_W-1:0];
  end

  initial begin
    assert (CLK_PER_FRAME_P >= SAMPLES)
      else $fatal(1, "time_tag_mapper: frame shorter than 256 clocks");
  end
endmodule

// tb_time_tag_mapper -- checks the clocks-to-steps mapping against the
// real-valued formula steps = clocks * 256 / 2,000,000 (= clocks * 0.000128
// for 10 ns clocks), rounded to 12 fraction bits and taken modulo 256 steps,
// for edge values and random delays up to the 25-bit maximum.
module tb_time_tag_mapper;
  import tb_ref_pkg::*;
  logic [24:0] delay_clk;
  logic [19:0] delay_step;
  int checks = 0, failures = 0;

  time_tag_mapper dut (.*);

  task automatic try(input int unsigned d);
    real s, want_r;
    longint want;
    delay_clk = 25'(d);
    #1;
    s = real'(d) * 256.0 / 2_000_000.0;
    want_r = s * 4096.0;
    want = longint'(want_r) % (256 * 4096);     // round, then modulo
    checks++;
    if (!(delay_step == 20'(want) || delay_step == 20'(want + 1) || delay_step == 20'(want - 1))) begin
      failures++;
      $display("FAIL d=%0d got %0d want %0d", d, delay_step, want);
    end
  endtask

  initial begin
    try(0); try(1); try(7812); try(7813); try(78125); try(1_000_000);
    try(1_999_999); try(2_000_000); try(2_000_001); try(33_554_431);
    for (int k = 0; k < 2000; k++) try($urandom_range(0, 2_100_000));
    for (int k = 0; k < 200; k++) try($urandom_range(0, 33_554_431));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

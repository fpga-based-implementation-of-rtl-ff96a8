// tb_w_lut -- reads every entry of the W lookup table and compares it with
// 1/(i - m) computed in double precision and rounded to 12 fraction bits.
module tb_w_lut;
  logic [3:0] i, m;
  logic signed [13:0] w;
  int checks = 0, failures = 0;

  w_lut dut (.*);

  initial begin
    for (int r = 0; r < 15; r++)
      for (int c = 0; c < 15; c++) begin
        int want;
        i = 4'(r); m = 4'(c);
        #1;
        want = (r == c) ? 0 : int'($floor(4096.0 / real'(r - c) + 0.5));
        checks++;
        if (int'(w) != want) begin
          failures++;
          $display("FAIL W(%0d,%0d) = %0d want %0d", r, c, w, want);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

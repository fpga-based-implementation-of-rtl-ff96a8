// tb_lagrange_subcoef -- random x, delay, window position and weight; the
// output Z must equal ((x + dt) - x_m) * W computed in double precision to
// within one 12-bit LSB (the block rounds once).
module tb_lagrange_subcoef;
  import tb_ref_pkg::*;
  logic [7:0] x;
  logic [19:0] dt;
  logic signed [10:0] xm;
  logic signed [13:0] w;
  logic signed [17:0] z;
  int checks = 0, failures = 0;

  lagrange_subcoef dut (.*);

  initial begin
    for (int k = 0; k < 5000; k++) begin
      real u, want;
      int off;
      x  = 8'($urandom_range(0, 255));
      dt = 20'($urandom_range(0, 256 * 4096 - 1));
      u  = real'(x) + q12(longint'(dt));
      off = $urandom_range(0, 14);                // point m of a window around u
      xm = 11'(int'($floor(u)) - 7 + off);
      w  = 14'($urandom_range(0, 8192) - 4096);
      #1;
      want = (u - real'(xm)) * q12(longint'(w));
      checks++;
      if (absr(q12(longint'(z)) - want) > 1.0 / 4096.0) begin
        failures++;
        $display("FAIL x=%0d dt=%0d xm=%0d w=%0d z=%0d want %f", x, dt, xm, w, z, want);
      end
    end
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

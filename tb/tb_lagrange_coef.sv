// tb_lagrange_coef -- streams random positions x + dt through coefficient
// blocks 0, 3, 7 and 14 and compares each l_I with the double-precision
// Lagrange basis value prod over m != I of (u - m)/(I - m), u being the
// position inside the 15-point window. Checks the pipeline latency
// (TREE_LAYERS + 1 = 5 clocks) and a tolerance of 8e-3 (each of the 5 product stages rounds to 12
// fraction bits, so small factors lose relative precision).
module tb_lagrange_coef;
  import dfc_pkg::*;
  import tb_ref_pkg::*;
  localparam int LAT = TREE_LAYERS + 1;
  localparam int IDX [4] = '{0, 3, 7, 14};
  logic clk = 0;
  idx_t x;
  step_t dt;
  xm_t base;
  prod_t coef [4];
  int checks = 0, failures = 0;
  real u_hist [$];
  real worst = 0.0;

  for (genvar g = 0; g < 4; g++) begin : g_dut
    lagrange_coef #(.I(IDX[g])) dut (.clk, .x, .dt, .base, .coef(coef[g]));
  end

  always #5 clk = ~clk;

  initial begin
    for (int k = 0; k < 3000 + LAT; k++) begin
      real upos;
      @(negedge clk);
      // compare the result of the input applied LAT clocks ago
      if (k >= LAT) begin
        automatic real ul = u_hist.pop_front();
        for (int g = 0; g < 4; g++) begin
          automatic real want = lagrange_basis(IDX[g], ul, 15);
          automatic real err = absr(q12(longint'(coef[g])) - want);
          if (err > worst) worst = err;
          checks++;
          if (err > 8.0e-3) begin
            failures++;
            $display("FAIL I=%0d u=%f got %f want %f", IDX[g], ul, q12(longint'(coef[g])), want);
          end
        end
      end
      x  = idx_t'($urandom_range(0, 255));
      dt = step_t'($urandom_range(0, 256 * 4096 - 1));
      if (k % 16 == 0) dt = '0;                   // exactly on a sample
      upos = real'(x) + q12(longint'(dt));
      base = xm_t'(int'($floor(upos)) - 7);
      u_hist.push_back(upos - real'(base));
    end
    $display("worst |l error| = %g", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

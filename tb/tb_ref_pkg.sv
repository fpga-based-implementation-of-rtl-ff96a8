// tb_ref_pkg -- reference arithmetic shared by the testbenches: real-valued
// Lagrange interpolation and fixed-point conversions, written independently
// of the RTL (double precision, no rounding steps).
package tb_ref_pkg;
  localparam real PI = 3.14159265358979323846;

  // value of the Lagrange basis polynomial l_i at u for points 0..n-1
  function automatic real lagrange_basis(input int i, input real u, input int n);
    real p = 1.0;
    for (int m = 0; m < n; m++)
      if (m != i) p = p * (u - m) / real'(i - m);
    return p;
  endfunction

  // interpolate 15 equally spaced values yw[0..14] (points 0..14) at u
  function automatic real lagrange15(input real yw[15], input real u);
    real s = 0.0;
    for (int i = 0; i < 15; i++) s += yw[i] * lagrange_basis(i, u, 15);
    return s;
  endfunction

  function automatic real q12(input longint v);
    return real'(v) / 4096.0;
  endfunction

  function automatic real absr(input real v);
    return (v < 0.0) ? -v : v;
  endfunction
endpackage

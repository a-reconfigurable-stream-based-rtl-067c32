// tb_ref_pkg -- conversions between the kernel's fixed-point words and reals,
// used by the testbenches to compute expected values in real arithmetic,
// independently of the fixed-point functions of the design.
package tb_ref_pkg;
  function automatic real fx2r(input logic signed [31:0] v);
    return real'(v) / 16777216.0;            // Q8.24
  endfunction
  function automatic real sup2r(input logic signed [31:0] v);
    return real'(v) / 1048576.0;             // Q12.20
  endfunction
  function automatic logic signed [31:0] r2fx(input real r);
    return 32'($rtoi(r * 16777216.0));
  endfunction
  function automatic real rabs(input real r);
    return (r < 0.0) ? -r : r;
  endfunction
  // uniform real in [lo, hi)
  function automatic real urand(input real lo, input real hi);
    return lo + (hi - lo) * (real'($urandom_range(0, 1000000)) / 1000001.0);
  endfunction
endpackage

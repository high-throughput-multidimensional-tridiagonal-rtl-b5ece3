// tb_fp_pkg: helpers the testbenches use to check FP32 results independently of
// the RTL operators. Values are converted between FP32 bit patterns and the
// simulator's double-precision `real`, and a result is accepted when it lies
// within a relative error bound of the double-precision reference.
package tb_fp_pkg;

  function automatic real fp_to_real(logic [31:0] x);
    real m;
    int  e;
    e = int'(x[30:23]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(x[22:0]) / 8388608.0;
    m = m * (2.0 ** (e - 127));
    return x[31] ? -m : m;
  endfunction

  // nearest FP32 pattern (truncated significand, normal range only)
  function automatic logic [31:0] real_to_fp(real v);
    logic s;
    int   e;
    real  a;
    logic [22:0] f;
    if (v == 0.0) return 32'd0;
    s = v < 0.0;
    a = s ? -v : v;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    f = 23'($rtoi((a - 1.0) * 8388608.0 + 0.5) & 32'h7fffff);
    return {s, 8'(e + 127), f};
  endfunction

  function automatic real fabs(real v);
    return v < 0.0 ? -v : v;
  endfunction

  // |got - ref| <= rel*|ref| + abs_tol
  function automatic bit close(real got, real ref_v, real rel, real abs_tol);
    return fabs(got - ref_v) <= rel * fabs(ref_v) + abs_tol;
  endfunction

  // random normal FP32 with exponent in [127-erange, 127+erange]
  function automatic logic [31:0] rand_fp(int erange);
    int e;
    e = 127 - erange + int'($urandom_range(2 * erange, 0));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage

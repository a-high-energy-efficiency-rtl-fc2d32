// tb_fp16_pkg: reference FP16 arithmetic for the testbenches.
//
// Converts half-precision bit patterns to and from the simulator's double
// precision 'real'. Sums and products of two FP16 values are exact in double
// precision, so rounding the exact real result back with to_fp16 (round to
// nearest, ties to even, flush-to-zero, saturate to infinity) gives the value
// the hardware must produce. This model shares no code with the RTL.
package tb_fp16_pkg;

  function automatic real to_real(logic [15:0] h);
    real m;
    int  e;
    if (h[14:10] == 5'd0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    e = int'(h[14:10]) - 15;
    if (e >= 0) m = m * real'(longint'(1) << e);
    else        m = m / real'(longint'(1) << (-e));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] to_fp16(real r);
    logic s;
    real  a, mr, rem;
    int   e, m, be;
    if (r == 0.0) return 16'h0000;
    s = (r < 0.0);
    a = s ? -r : r;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; if (e > 40) break; end
    while (a < 1.0)  begin a = a * 2.0; e--; if (e < -40) break; end
    mr  = a * 1024.0;
    m   = int'($floor(mr));
    rem = mr - real'(m);
    if (rem > 0.5 || (rem == 0.5 && (m % 2) == 1)) m++;
    if (m == 2048) begin m = 1024; e++; end
    be = e + 15;
    if (be >= 31) return {s, 5'd31, 10'd0};
    if (be <= 0)  return 16'h0000;
    return {s, 5'(be), 10'(m - 1024)};
  endfunction

  // Random normal FP16 value with a moderate exponent.
  function automatic logic [15:0] rnd_fp16(int emin, int emax);
    logic [15:0] h;
    h[15]    = 1'($urandom);
    h[14:10] = 5'(emin + ($urandom % (emax - emin + 1)));
    h[9:0]   = 10'($urandom);
    return h;
  endfunction

endpackage

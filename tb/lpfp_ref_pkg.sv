// lpfp_ref_pkg: reference arithmetic for the testbenches, written from the
// number format's definition rather than from the RTL's structure.
//
//   lpfp_units(code)      signed value of an M4E3 byte {S,M,E} in units of
//                         2^-6 (the smallest subnormal step)
//   ref_quant(x, frac)    nearest M4E3 code to x * 2^-frac by exhaustive
//                         search over all codes (ties to the larger
//                         magnitude, saturation at +-31)
//   ref_psum(x, sh)       16-bit partial result: round(x / 2^sh), saturated
package lpfp_ref_pkg;

  function automatic int lpfp_units(input logic [7:0] code);
    int m, e, v;
    m = int'(code[6:3]);
    e = int'(code[2:0]);
    if (e == 0) v = m;
    else        v = (16 + m) << (e - 1);
    return code[7] ? -v : v;
  endfunction

  function automatic real lpfp_real(input logic [7:0] code);
    return real'(lpfp_units(code)) / 64.0;
  endfunction

  function automatic logic [7:0] ref_quant(input longint x, input int frac);
    real v, mag, best_err, err;
    logic [7:0] best;
    v   = real'(x) / (2.0 ** frac);
    mag = (v < 0.0) ? -v : v;
    best = 8'h00;
    best_err = mag;
    for (int c = 1; c < 128; c++) begin
      err = mag - lpfp_real(8'(c));
      if (err < 0.0) err = -err;
      if (err < best_err || (err == best_err && lpfp_real(8'(c)) > lpfp_real(best))) begin
        best_err = err;
        best = 8'(c);
      end
    end
    if (v < 0.0 && best != 8'h00) best[7] = 1'b1;
    return best;
  endfunction

  function automatic logic [15:0] ref_psum(input longint x, input int sh);
    longint t;
    real r;
    r = real'(x) / (2.0 ** sh);
    t = longint'($floor(r + 0.5));
    if (t > 32767) t = 32767;
    if (t < -32768) t = -32768;
    return 16'(t);
  endfunction

  function automatic longint sat32(input longint x);
    if (x > 64'sd2147483647) return 64'sd2147483647;
    if (x < -64'sd2147483648) return -64'sd2147483648;
    return x;
  endfunction

endpackage

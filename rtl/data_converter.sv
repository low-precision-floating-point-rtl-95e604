// data_converter (DC): 32-bit fixed point to LPFP, round to nearest with
// saturation.
//
// The input x has `frac` fraction bits (chosen per layer, it folds in the
// layer's scaling factors). The magnitude is placed in a 65-bit word with
// 32 extra fraction bits, so every shift below is a right shift. The LPFP
// grid has LSB 2^-(MW+EB-1) (2^-6 for M4E3); magnitudes below 2^MW grid
// steps are subnormal (E = 0, M = the rounded step count), larger ones get
// E from the position of the leading one and MW mantissa bits after it.
// Rounding adds the first dropped bit (ties away from zero, like C's
// round()); a mantissa that rounds up to 2^MW moves to the next exponent.
// Magnitudes above the largest LPFP value give the largest value (E = 7,
// M = 15 for M4E3, i.e. +-31.0); there is no Inf or NaN. A result that
// rounds to zero has sign 0. The output field order is {S, M, E}.
//
// Purely combinational; the PPM registers its output.
//
// From the paper: conversion of the 32-bit result to M4E3 with saturation to the
// largest value. Own choices: round to nearest with ties away from zero, and a
// power-of-two layer scale given as `frac`.
module data_converter
  import lpfp_pkg::*;
(
  input  logic signed [ACC_W-1:0] x,
  input  logic [5:0]              frac,
  output lpfp_t                   y
);

  localparam int WW = ACC_W + 33;   // magnitude plus 32 guard bits

  logic [WW-1:0] wide;
  logic [ACC_W:0] mag;
  int            qb, lead, sh, ee;
  logic [WW-1:0] r;

  always_comb begin
    mag  = x[ACC_W-1] ? (ACC_W+1)'(-$signed({x[ACC_W-1], x})) : (ACC_W+1)'(x);
    wide = WW'(mag) << 32;
    qb   = int'(frac) + 32 - LPFP_Q;     // bit of one LPFP grid step
    lead = -1;
    for (int i = 0; i < WW; i++)
      if (wide[i]) lead = i;
    y  = '0;
    r  = '0;
    sh = 0;
    ee = 0;
    if (lead >= 0) begin
      if (lead < qb + MW) begin
        sh = qb;                          // subnormal range
        ee = 0;
      end else begin
        sh = lead - MW;
        ee = lead - (qb + MW) + 1;
      end
      r = (wide >> sh) + ((sh - 1 < WW) ? WW'(wide[sh-1]) : '0);
      if (ee == 0) begin
        if (r >= WW'(1 << MW)) begin      // rounded up into the normal range
          ee = 1;
          r  = r - WW'(1 << MW);
        end
      end else begin
        if (r >= WW'(2 << MW)) begin      // mantissa overflow: next exponent
          ee = ee + 1;
          r  = '0;
        end else begin
          r = r - WW'(1 << MW);
        end
      end
      if (ee > EMAX) begin
        y.e = EW'(EMAX);
        y.m = '1;
      end else begin
        y.e = EW'(ee);
        y.m = MW'(r);
      end
      y.s = x[ACC_W-1] && (y.e != '0 || y.m != '0);
    end
  end

endmodule

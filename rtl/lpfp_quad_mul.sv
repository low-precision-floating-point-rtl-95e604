// lpfp_quad_mul: four M4E3 multiplications in one DSP-style multiply-add.
//
// A PE multiplies two activations (a, b: two output pixels) by two weights
// (c, d: two output channels) and needs all four products ac, ad, bc, bd.
// Each product splits into sign XOR, exponent addition and mantissa
// multiplication. The mantissa product with the hidden bits restored is
//   h_x.M_x * h_y.M_y = 0.M_x*0.M_y + (h_x*h_y + h_y*0.M_x + h_x*0.M_y)
// so the 4x4-bit mantissa products go through one wide multiplier and the
// remaining "extra term" is added as the multiplier's C operand. The packing
// follows the DSP48E1 layout P = A*B + C (A 25 bits, B 18 bits, C and P
// 48 bits):
//   A[23:20] = M_a, A[3:0] = M_b, zeros between
//   B[13:10] = M_c, B[3:0] = M_d, zeros between
//   C and P in 10-bit fields: [39:30] ac, [29:20] ad, [19:10] bc, [9:0] bd
// All values are integers with the binary point at the right (LSB weight
// 2^-8 for a product mantissa). The largest field value, 15*15 + 256 + 240
// + 240 = 961, stays below 1024, so the fields never carry into each other.
//
// The published scheme writes the extra term for two normal numbers as
// 1.M_x + 0.M_y. Subnormal inputs (E = 0, hidden bit 0) are handled here by
// gating each part of the extra term with the hidden bits, which gives the
// exact product for every pair of codes; that generalisation is this
// design's own. The exponent adder adds effective exponents (E, or 1 for a
// subnormal) without removing the bias, which is left for the alignment
// step as in the published design.
//
// Timing: operands are combinational inputs; the four products are
// registered (the DSP's P register), latency 1, one new set per cycle.
module lpfp_quad_mul
  import lpfp_pkg::*;
(
  input  logic       clk,
  input  lpfp_t      a,      // activation, pixel 0
  input  lpfp_t      b,      // activation, pixel 1
  input  lpfp_t      c,      // weight, output channel 0
  input  lpfp_t      d,      // weight, output channel 1
  output lpfp_prod_t p_ac,
  output lpfp_prod_t p_ad,
  output lpfp_prod_t p_bc,
  output lpfp_prod_t p_bd
);

  localparam int FW = PM_W;   // field width in C and P, 10

  function automatic logic [FW-1:0] extra_term(input lpfp_t x, input lpfp_t y);
    logic hx, hy;
    logic [FW-1:0] t;
    hx = (x.e != '0);
    hy = (y.e != '0);
    t  = '0;
    if (hx && hy) t = t + FW'(1 << (2 * MW));
    if (hy)       t = t + (FW'(x.m) << MW);
    if (hx)       t = t + (FW'(y.m) << MW);
    return t;
  endfunction

  function automatic logic [PE_W-1:0] exp_sum(input lpfp_t x, input lpfp_t y);
    logic [EW-1:0] ex, ey;
    ex = (x.e == '0) ? EW'(1) : x.e;
    ey = (y.e == '0) ? EW'(1) : y.e;
    return PE_W'(ex) + PE_W'(ey);
  endfunction

  logic [24:0] dsp_a;
  logic [17:0] dsp_b;
  logic [47:0] dsp_c;
  logic [47:0] dsp_p;

  always_comb begin
    dsp_a = '0;
    dsp_a[23:20] = a.m;
    dsp_a[3:0]   = b.m;
    dsp_b = '0;
    dsp_b[13:10] = c.m;
    dsp_b[3:0]   = d.m;
    dsp_c = '0;
    dsp_c[39:30] = extra_term(a, c);
    dsp_c[29:20] = extra_term(a, d);
    dsp_c[19:10] = extra_term(b, c);
    dsp_c[9:0]   = extra_term(b, d);
    dsp_p = 48'(dsp_a) * 48'(dsp_b) + dsp_c;
  end

  always_ff @(posedge clk) begin
    p_ac <= '{s: a.s ^ c.s, m: dsp_p[39:30], e: exp_sum(a, c)};
    p_ad <= '{s: a.s ^ d.s, m: dsp_p[29:20], e: exp_sum(a, d)};
    p_bc <= '{s: b.s ^ c.s, m: dsp_p[19:10], e: exp_sum(b, c)};
    p_bd <= '{s: b.s ^ d.s, m: dsp_p[9:0],   e: exp_sum(b, d)};
  end

endmodule

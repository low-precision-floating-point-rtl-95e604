// align_module (AM): turns one M10E4 product into fixed point.
//
// The product mantissa (LSB weight 2^-8) is shifted left by the exponent
// sum less its smallest possible value (2, both inputs subnormal or E=1),
// which puts every product on one grid with LSB weight 2^-12 (for M4E3; the
// bias 2*EB is taken out here, once, rather than in each exponent adder).
// The largest product, 961 << 12, needs 22 magnitude bits, so the 23-bit
// two's complement result is exact: no bit is truncated, matching the
// published 15-bit to 23-bit conversion.
//
// Timing: one register, latency 1, one product per cycle.
//
// From the paper: the 15-bit product is turned into a 23-bit fixed-point value
// with no truncation. Own choices: the LSB weight (2^-12) that realises this and
// the single pipeline register.
module align_module
  import lpfp_pkg::*;
(
  input  logic                   clk,
  input  lpfp_prod_t             prod,
  output logic signed [AM_W-1:0] fixed
);

  logic [AM_W-2:0] mag;
  logic [PE_W-1:0] sh;

  always_comb begin
    sh  = (prod.e >= PE_W'(2)) ? prod.e - PE_W'(2) : '0;
    mag = (AM_W-1)'(prod.m) << sh;
  end

  always_ff @(posedge clk)
    fixed <= prod.s ? -$signed({1'b0, mag}) : $signed({1'b0, mag});

endmodule

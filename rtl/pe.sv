// pe: processing element, a fully pipelined dot-product engine for two
// output pixels in each of two output channels.
//
// Every cycle the PE takes NM/2 activations and NM/2 weights:
//   act[0 .. NCH-1]     pixel a, input channels 0..NCH-1
//   act[NCH .. 2NCH-1]  pixel b, same input channels
//   wt[0 .. NCH-1]      weights of output channel c
//   wt[NCH .. 2NCH-1]   weights of output channel d
// with NCH = NM/4 (24 for NM = 96). Input channel i feeds one quad
// multiplier (one DSP) that forms a_i*c_i, b_i*c_i, a_i*d_i and b_i*d_i, so
// activations are reused across the two output channels and weights across
// the two pixels. Each product is aligned to fixed point (AM), and four
// adder trees sum the NCH products of one output each. Four PPMs accumulate
// the sums over the cycles of a block (the kernel positions), add the bias
// or partial result, and pool, activate and convert.
//
// Output slots (16 bits each, 64 bits per PE): 0 = sum(ac), 1 = sum(bc),
// 2 = sum(ad), 3 = sum(bd).
//
// Timing: a tree sum reaches the PPMs pe_latency(NM) cycles after its
// operands are at act/wt (multiplier, alignment and clog2(NCH) tree
// registers). ctl and psum_in must be presented in that same cycle; the
// sequencer (fpfu_ctrl) delays them. Results leave 2 cycles after the last
// beat reaches the PPMs.
//
// From the paper: N_m multipliers packed four per DSP, alignment modules, four
// adder trees and four post-process modules computing two pixels of two output
// channels over N_m/4 input channels. Own choices: the order of values within
// the input words, the output slot order and all pipeline registers.
module pe
  import lpfp_pkg::*;
#(
  parameter int NM = NM_DEF
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [NM/2-1:0][BW-1:0]     act,
  input  logic [NM/2-1:0][BW-1:0]     wt,
  input  ppm_ctl_t                    ctl,
  input  logic [3:0][PSUM_W-1:0]      psum_in,
  output logic                        out_valid,
  output logic [3:0][PSUM_W-1:0]      out_data
);

  localparam int NCH = NM / 4;
  localparam int TW  = AM_W + ((NCH <= 1) ? 1 : $clog2(NCH));

  lpfp_prod_t               prod [4][NCH];
  logic [NCH-1:0][AM_W-1:0] am   [4];
  logic signed [TW-1:0]     sum  [4];
  logic [3:0]               vld;

  for (genvar i = 0; i < NCH; i++) begin : g_ch
    lpfp_quad_mul u_mul (
      .clk  (clk),
      .a    (lpfp_t'(act[i])),
      .b    (lpfp_t'(act[NCH+i])),
      .c    (lpfp_t'(wt[i])),
      .d    (lpfp_t'(wt[NCH+i])),
      .p_ac (prod[0][i]),
      .p_ad (prod[2][i]),
      .p_bc (prod[1][i]),
      .p_bd (prod[3][i])
    );
    for (genvar j = 0; j < 4; j++) begin : g_am
      align_module u_am (.clk(clk), .prod(prod[j][i]), .fixed(am[j][i]));
    end
  end

  for (genvar j = 0; j < 4; j++) begin : g_out
    adder_tree #(.N(NCH), .IN_W(AM_W), .OUT_W(TW)) u_tree (
      .clk (clk),
      .din (am[j]),
      .sum (sum[j])
    );
    ppm #(.IN_W(TW)) u_ppm (
      .clk       (clk),
      .rst_n     (rst_n),
      .ctl       (ctl),
      .sum       (sum[j]),
      .psum_in   (psum_in[j]),
      .out_valid (vld[j]),
      .out_data  (out_data[j])
    );
  end

  // All four PPMs see the same control, so their valids agree.
  assign out_valid = vld[0];

endmodule

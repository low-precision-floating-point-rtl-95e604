// fpfu: floating-point function unit, NP processing elements fed from the
// IFMB and WB rows and writing one OFMB row.
//
// The PEs form P_IFM groups of P_OFM PEs (P_IFM * P_OFM = NP). PE number
// g*P_OFM + o takes activation slice g of the IFMB row and weight slice o
// of the WB row: the P_OFM PEs of a group share activations and work on
// different output channels, and PE o of every group shares weights and
// works on different input pixels. Each slice is NM/2 LPFP words, so the
// IFMB row is NM/2*P_IFM*8 bits, the WB row NM/2*P_OFM*8 bits and the OFMB
// row 64*NP bits (four 16-bit slots per PE, PE 0 in the LSBs).
//
// Timing is that of the PE: ctl and psum_row arrive pe_latency(NM) cycles
// after the operands; out_row is valid with out_valid.
//
// From the paper: N_p PEs, P_ifm groups that share the weights, P_ofm PEs per
// group that share activations, buffer widths N_m/2*P_ifm*8 and N_m/2*P_ofm*8
// bits, 64 bits of OFMB per PE. Own choice: P_ifm = 4, P_ofm = 8 (the paper gives
// only the product).
module fpfu
  import lpfp_pkg::*;
#(
  parameter int NM    = NM_DEF,
  parameter int NP    = NP_DEF,
  parameter int P_IFM = PIFM_DEF,
  parameter int P_OFM = POFM_DEF
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic [P_IFM-1:0][NM/2-1:0][BW-1:0]     ifm_row,
  input  logic [P_OFM-1:0][NM/2-1:0][BW-1:0]     w_row,
  input  ppm_ctl_t                               ctl,
  input  logic [NP-1:0][3:0][PSUM_W-1:0]         psum_row,
  output logic                                   out_valid,
  output logic [NP-1:0][3:0][PSUM_W-1:0]         out_row
);

  if (P_IFM * P_OFM != NP) begin : g_bad_cfg
    $error("fpfu: P_IFM * P_OFM must equal NP");
  end

  logic [NP-1:0] vld;

  for (genvar g = 0; g < P_IFM; g++) begin : g_grp
    for (genvar o = 0; o < P_OFM; o++) begin : g_pe
      pe #(.NM(NM)) u_pe (
        .clk       (clk),
        .rst_n     (rst_n),
        .act       (ifm_row[g]),
        .wt        (w_row[o]),
        .ctl       (ctl),
        .psum_in   (psum_row[g*P_OFM+o]),
        .out_valid (vld[g*P_OFM+o]),
        .out_data  (out_row[g*P_OFM+o])
      );
    end
  end

  assign out_valid = vld[0];

endmodule

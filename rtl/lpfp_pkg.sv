// lpfp_pkg: types and constants shared by the LPFP CNN processor.
//
// Number format. An LPFP number is sign, mantissa, exponent, packed in
// that order from the MSB: {S, M[MW-1:0], E[EW-1:0]}. The value is
// (-1)^S * 1.M * 2^(E-EB) for E>0 and (-1)^S * 0.M * 2^(1-EB) for E=0
// (subnormal), with bias EB = 2^(EW-1)-1. There is no Inf or NaN: values
// out of range saturate to the largest magnitude. The processor is built
// for M4E3 (MW=4, EW=3, EB=3), the format the design was implemented in.
//
// Widths along the datapath follow from the format:
//   product of two LPFP numbers  : sign, 10-bit mantissa, 4-bit exponent
//                                  sum (M10E4, 15 bits)
//   aligned product (fixed point): 23-bit two's complement, LSB = 2^-12
//   accumulator                  : 32-bit two's complement
//   partial results and biases   : 16-bit two's complement
//
// Instructions. The block-level instruction set is this design's own:
// 128-bit words with a 4-bit opcode in the MSBs and an operand body.
//
// From the paper: the M4E3 format (sign, mantissa, exponent in that order, bias 3),
// the 15/23/32-bit datapath widths, 16-bit biases and partial results, N_m = 96
// and N_p = 32. Own choices: the P_ifm/P_ofm split (4 x 8), the 512-bit memory
// beat and the whole instruction encoding.
package lpfp_pkg;

  // ---- number format ----------------------------------------------------
  localparam int MW     = 4;                        // mantissa bits
  localparam int EW     = 3;                        // exponent bits
  localparam int BW     = 1 + MW + EW;              // LPFP word, 8
  localparam int EB     = (1 << (EW - 1)) - 1;      // exponent bias, 3
  localparam int EMAX   = (1 << EW) - 1;            // largest exponent code, 7
  localparam int PM_W   = 2 * MW + 2;               // product mantissa, 10
  localparam int PE_W   = EW + 1;                   // product exponent, 4
  localparam int PROD_W = 1 + PM_W + PE_W;          // product word, 15
  // Effective exponents run 1..EMAX, so an exponent sum runs 2..2*EMAX and
  // the alignment shift runs 0..2*EMAX-2.
  localparam int AM_W   = 1 + PM_W + 2 * EMAX - 2;  // aligned product, 23
  localparam int AM_FRAC = 2 * MW + 2 * EB - 2;     // LSB weight 2^-12
  localparam int ACC_W  = 32;                       // PPM accumulator
  localparam int PSUM_W = 16;                       // partial result / bias
  localparam int LPFP_Q = MW + EB - 1;              // LSB of LPFP grid 2^-6

  typedef struct packed {
    logic          s;
    logic [MW-1:0] m;
    logic [EW-1:0] e;
  } lpfp_t;

  typedef struct packed {
    logic            s;
    logic [PM_W-1:0] m;   // product mantissa, LSB weight 2^-(2*MW)
    logic [PE_W-1:0] e;   // sum of effective exponents, bias not removed
  } lpfp_prod_t;

  // ---- processor defaults ---------------------------------------------------
  localparam int NM_DEF    = 96;   // multipliers per PE
  localparam int NP_DEF    = 32;   // PEs
  localparam int PIFM_DEF  = 4;    // PE groups sharing weights
  localparam int POFM_DEF  = 8;    // PEs per group sharing activations
  localparam int MEM_W     = 512;  // external memory beat width
  localparam int ADDR_W    = 16;   // on-chip buffer row address width
  localparam int EXT_AW    = 32;   // external memory beat address width

  // Pipeline depth of a PE from operands at the multiplier input to the
  // adder-tree sum at the PPM input: multiplier register, alignment
  // register, one register per adder-tree level.
  function automatic int pe_latency(input int nm);
    int n = nm / 4;
    return 2 + ((n <= 1) ? 1 : $clog2(n));
  endfunction

  // ---- instructions -----------------------------------------------------------
  typedef enum logic [3:0] {
    OP_NOP       = 4'd0,
    OP_LOAD_IFM  = 4'd1,   // external memory -> IFMB
    OP_LOAD_W    = 4'd2,   // external memory -> WB
    OP_LOAD_OFM  = 4'd3,   // external memory -> OFMB (biases, partial results)
    OP_STORE_OFM = 4'd4,   // OFMB -> external memory
    OP_COMPUTE   = 4'd5,   // one compute block on the FPFU
    OP_WAIT      = 4'd6,   // wait until the selected units are idle
    OP_HALT      = 4'd7
  } opcode_e;

  typedef enum logic [1:0] {
    BUF_IFM = 2'd0,
    BUF_W   = 2'd1,
    BUF_OFM = 2'd2
  } buf_sel_e;

  typedef struct packed {
    buf_sel_e          target;
    logic              store;     // 1: OFMB -> external memory
    logic              bank;      // ping-pong bank used by the transfer
    logic [EXT_AW-1:0] ext_addr;  // first beat in external memory
    logic [ADDR_W-1:0] buf_addr;  // first buffer row
    logic [ADDR_W-1:0] rows;      // number of buffer rows (>0)
  } dma_cmd_t;

  typedef struct packed {
    logic [ADDR_W-1:0] ifm_addr;     // first IFMB row
    logic [ADDR_W-1:0] w_addr;       // first WB row
    logic [ADDR_W-1:0] len;          // rows streamed = cycles accumulated (>0)
    logic [ADDR_W-1:0] ofm_rd_addr;  // OFMB row holding biases / partial results
    logic [ADDR_W-1:0] ofm_wr_addr;  // OFMB row receiving the result
    logic              ifm_bank;
    logic              w_bank;
    logic              ofm_bank;
    logic              init_psum;    // 1: start from the OFMB row, 0: from zero
    logic              final_out;    // 1: pool, activate, convert to LPFP
    logic              relu;         // activation on (final only)
    logic              pool_en;      // max pooling over successive blocks
    logic              pool_first;   // this block opens a pooling window
    logic              pool_last;    // this block closes it (result written)
    logic [4:0]        psum_shift;   // 16-bit partial = accumulator >>> shift
    logic [5:0]        out_frac;     // fraction bits of the accumulator at DC
  } comp_cmd_t;

  typedef struct packed {
    logic       wait_dma;
    logic       wait_comp;
  } wait_cmd_t;

  localparam int INSTR_W = 128;
  localparam int BODY_W  = INSTR_W - 4;

  typedef struct packed {
    opcode_e           op;
    logic [BODY_W-1:0] body;    // dma_cmd_t, comp_cmd_t or wait_cmd_t in the LSBs
  } instr_t;

  // Per-PPM controls that travel with the last beat of a block.
  typedef struct packed {
    logic       init_psum;
    logic       final_out;
    logic       relu;
    logic       pool_en;
    logic       pool_first;
    logic       pool_last;
    logic [4:0] psum_shift;
    logic [5:0] out_frac;
  } ppm_cfg_t;

  typedef struct packed {
    logic     valid;   // a tree sum is at the PPM input
    logic     first;   // first beat of a block: start from init value
    logic     last;    // last beat: result leaves the PPM
    ppm_cfg_t cfg;
  } ppm_ctl_t;

endpackage

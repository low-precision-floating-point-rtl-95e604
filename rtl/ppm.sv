// ppm: post process module of one output pixel stream (ACC, pooling,
// activation, then output conversion).
//
// ACC: a block of `len` beats (one adder-tree sum per cycle, one kernel
// position each) is accumulated in a 32-bit saturating accumulator. On the
// first beat the accumulator starts from the 16-bit partial result or bias
// read from the OFMB (shifted left by psum_shift to line up with the
// accumulator's fraction bits), or from zero.
//
// On the last beat the block result goes one of two ways:
//   * not final: it is a partial result for a later block (more input
//     channels to come). It is rounded back to 16 bits (>>> psum_shift,
//     round half up, saturate) and written to the OFMB.
//   * final: max pooling, then activation (ReLU or none), then the data
//     converter to M4E3. Pooling keeps a running maximum over successive
//     blocks: pool_first opens a window, pool_last closes it and only then
//     is a result written. With pooling off every block writes.
//
// Output word: the 16-bit partial result, or {8'h00, LPFP byte}.
//
// Timing: the control and the 16-bit init value travel with the tree sum
// (ctl.first / ctl.last). The result leaves 2 cycles after the last beat
// enters (accumulator register, output register).
//
// From the paper: accumulation with a bias or partial result, then pooling,
// then activation, in that order; a 32-bit accumulator; 16-bit intermediate
// results in the OFMB; conversion back to M4E3. Own choices: max pooling across
// successive blocks, ReLU as the only activation, the rounding/saturating
// shift that makes the 16-bit partial result, and the 2-cycle timing.
module ppm
  import lpfp_pkg::*;
#(
  parameter int IN_W = 28
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  ppm_ctl_t               ctl,
  input  logic signed [IN_W-1:0] sum,
  input  logic [PSUM_W-1:0]      psum_in,
  output logic                   out_valid,
  output logic [PSUM_W-1:0]      out_data
);

  localparam logic signed [ACC_W-1:0] AMAX = {1'b0, {(ACC_W-1){1'b1}}};
  localparam logic signed [ACC_W-1:0] AMIN = {1'b1, {(ACC_W-1){1'b0}}};

  function automatic logic signed [ACC_W-1:0] sat_add(
      input logic signed [ACC_W-1:0] x, input logic signed [ACC_W-1:0] y);
    logic signed [ACC_W:0] t;
    t = {x[ACC_W-1], x} + {y[ACC_W-1], y};
    if (t > $signed({AMAX[ACC_W-1], AMAX})) return AMAX;
    if (t < $signed({AMIN[ACC_W-1], AMIN})) return AMIN;
    return t[ACC_W-1:0];
  endfunction

  // 16-bit partial result from the accumulator
  function automatic logic [PSUM_W-1:0] to_psum(
      input logic signed [ACC_W-1:0] x, input logic [4:0] sh);
    logic signed [ACC_W:0] t;
    t = ($signed({x[ACC_W-1], x}) + ((ACC_W+1)'(1) << sh >> 1)) >>> sh;
    if (t > (ACC_W+1)'(2 ** (PSUM_W - 1) - 1)) return {1'b0, {(PSUM_W-1){1'b1}}};
    if (t < -$signed((ACC_W+1)'(2 ** (PSUM_W - 1)))) return {1'b1, {(PSUM_W-1){1'b0}}};
    return t[PSUM_W-1:0];
  endfunction

  logic signed [ACC_W-1:0] acc, init, base, pool_reg, pooled, act;
  logic                    res_valid;
  ppm_cfg_t                res_cfg;
  lpfp_t                   lp;

  always_comb begin
    init = ctl.cfg.init_psum ? ($signed(ACC_W'($signed(psum_in))) <<< ctl.cfg.psum_shift) : '0;
    base = ctl.first ? init : acc;
  end

  // ACC
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      acc       <= '0;
      res_valid <= 1'b0;
      res_cfg   <= '0;
    end else begin
      res_valid <= ctl.valid && ctl.last;
      if (ctl.valid) begin
        acc <= sat_add(base, ACC_W'(sum));
        if (ctl.last) res_cfg <= ctl.cfg;
      end
    end

  // Pooling, activation, conversion
  always_comb begin
    if (!res_cfg.pool_en || res_cfg.pool_first) pooled = acc;
    else pooled = (acc > pool_reg) ? acc : pool_reg;
    act = (res_cfg.relu && pooled < 0) ? '0 : pooled;
  end

  data_converter u_dc (.x(act), .frac(res_cfg.out_frac), .y(lp));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      pool_reg  <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (res_valid) begin
        if (!res_cfg.final_out) begin
          out_valid <= 1'b1;
          out_data  <= to_psum(acc, res_cfg.psum_shift);
        end else begin
          pool_reg <= pooled;
          if (!res_cfg.pool_en || res_cfg.pool_last) begin
            out_valid <= 1'b1;
            out_data  <= {8'h00, lp};
          end
        end
      end
    end

endmodule

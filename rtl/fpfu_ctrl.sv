// fpfu_ctrl: sequencer of compute blocks on the FPFU.
//
// A compute block streams `len` consecutive rows of the IFMB and the WB
// (one row per cycle, typically the KW*KH kernel positions of NM/4 input
// channels) into every PE and accumulates them into one OFMB row. The
// controller
//   * issues the IFMB/WB row reads, one per cycle;
//   * sends a tag (valid, first, last, PPM controls, OFMB addresses) down a
//     shift register that matches the datapath: buffer read (1) plus the PE
//     pipeline (pe_latency), so the tag meets its tree sum at the PPMs;
//   * reads the OFMB row of biases / partial results one cycle before the
//     first beat reaches the PPMs, so it arrives with it;
//   * writes the OFMB result row 2 cycles after the last beat reaches the
//     PPMs, unless the block is inside a pooling window that is not closed.
// A new block is accepted in the last issue cycle of the previous one, so
// blocks stream back to back without bubbles. busy stays high until the
// last result of every accepted block is written.
//
// The compiler must not let a block read an OFMB row that an earlier block
// still in flight has yet to write (the write trails the reads by about
// pe_latency + 3 cycles).
//
// The paper says only that activations and weights are distributed to the PEs
// under control signals decoded by the CCM; this sequencer, its back-to-back
// streaming and its timing are this design's own.
module fpfu_ctrl
  import lpfp_pkg::*;
#(
  parameter int NM = NM_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  comp_cmd_t         cmd,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  output logic              busy,
  // IFMB / WB reads
  output logic              ifm_re,
  output logic              ifm_bank,
  output logic [ADDR_W-1:0] ifm_raddr,
  output logic              w_re,
  output logic              w_bank,
  output logic [ADDR_W-1:0] w_raddr,
  // OFMB compute side
  output logic              ofm_re,
  output logic              ofm_rbank,
  output logic [ADDR_W-1:0] ofm_raddr,
  output logic              ofm_we,
  output logic              ofm_wbank,
  output logic [ADDR_W-1:0] ofm_waddr,
  // PPM control, aligned with the tree sums
  output ppm_ctl_t          ctl,
  input  logic              fpfu_out_valid
);

  localparam int D = 1 + pe_latency(NM);  // read issue -> PPM input
  localparam int S = D + 2;               // read issue -> OFMB write

  typedef struct packed {
    logic              valid;
    logic              first;
    logic              last;
    logic              write;
    ppm_cfg_t          cfg;
    logic              ofm_bank;
    logic [ADDR_W-1:0] rd_addr;
    logic [ADDR_W-1:0] wr_addr;
  } tag_t;

  logic              active;
  comp_cmd_t         cur;
  logic [ADDR_W-1:0] cnt;
  logic              at_end;
  tag_t              tag0;
  tag_t              pipe [1:S];

  assign at_end    = active && (cnt == cur.len - ADDR_W'(1));
  assign cmd_ready = !active || at_end;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      active <= 1'b0;
      cur    <= '0;
      cnt    <= '0;
    end else if (cmd_valid && cmd_ready) begin
      active <= 1'b1;
      cur    <= cmd;
      cnt    <= '0;
    end else if (at_end) begin
      active <= 1'b0;
    end else if (active) begin
      cnt <= cnt + ADDR_W'(1);
    end

  always_comb begin
    tag0.valid    = active;
    tag0.first    = (cnt == '0);
    tag0.last     = at_end;
    tag0.write    = !cur.final_out || !cur.pool_en || cur.pool_last;
    tag0.cfg      = '{init_psum:  cur.init_psum,  final_out: cur.final_out,
                      relu:       cur.relu,       pool_en:   cur.pool_en,
                      pool_first: cur.pool_first, pool_last: cur.pool_last,
                      psum_shift: cur.psum_shift, out_frac:  cur.out_frac};
    tag0.ofm_bank = cur.ofm_bank;
    tag0.rd_addr  = cur.ofm_rd_addr;
    tag0.wr_addr  = cur.ofm_wr_addr;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int i = 1; i <= S; i++) pipe[i] <= '0;
    end else begin
      pipe[1] <= tag0;
      for (int i = 2; i <= S; i++) pipe[i] <= pipe[i-1];
    end

  assign ifm_re    = active;
  assign ifm_bank  = cur.ifm_bank;
  assign ifm_raddr = cur.ifm_addr + cnt;
  assign w_re      = active;
  assign w_bank    = cur.w_bank;
  assign w_raddr   = cur.w_addr + cnt;

  assign ofm_re    = pipe[D-1].valid && pipe[D-1].first && pipe[D-1].cfg.init_psum;
  assign ofm_rbank = pipe[D-1].ofm_bank;
  assign ofm_raddr = pipe[D-1].rd_addr;

  assign ctl = '{valid: pipe[D].valid, first: pipe[D].first,
                 last: pipe[D].last, cfg: pipe[D].cfg};

  assign ofm_we    = pipe[S].valid && pipe[S].last && pipe[S].write;
  assign ofm_wbank = pipe[S].ofm_bank;
  assign ofm_waddr = pipe[S].wr_addr;

  always_comb begin
    busy = active;
    for (int i = 1; i <= S; i++) busy = busy || pipe[i].valid;
  end

  a_len: assert property (@(posedge clk) disable iff (!rst_n)
                          cmd_valid && cmd_ready |-> cmd.len != '0)
    else $error("fpfu_ctrl: compute block of length 0");
  a_wr_match: assert property (@(posedge clk) disable iff (!rst_n)
                               ofm_we == fpfu_out_valid)
    else $error("fpfu_ctrl: OFMB write out of step with the PE results");

endmodule

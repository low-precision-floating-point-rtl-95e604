// lpfp_processor: CNN inference processor with 8-bit low-precision
// floating-point (M4E3) weights and activations.
//
// Blocks:
//   ccm         central control module with the instruction RAM (IR)
//   u_ms        memory system: DMA, IFMB, WB, OFMB (ping-pong buffers)
//   u_seq       FPFU sequencer: streams buffer rows, aligns PPM controls
//   u_fpfu      NP processing elements of NM LPFP multipliers each
//
// Operation: the host fills external memory with quantized activations
// (M4E3), weights (M4E3) and 16-bit fixed-point biases laid out as buffer
// rows, writes a program into the IR and pulses start. The program loads
// buffers, runs compute blocks on the FPFU, stores results, and ends with
// HALT, which raises done.
//
// Defaults are the configuration the processor was built in: NM = 96,
// NP = 32 (3072 multipliers in 768 DSPs), with P_IFM = 4 PE groups of
// P_OFM = 8; the P split and all buffer depths are this design's choice.
module lpfp_processor
  import lpfp_pkg::*;
#(
  parameter int NM        = NM_DEF,
  parameter int NP        = NP_DEF,
  parameter int P_IFM     = PIFM_DEF,
  parameter int P_OFM     = POFM_DEF,
  parameter int IFM_DEPTH = 1024,
  parameter int W_DEPTH   = 64,
  parameter int OFM_DEPTH = 1024,
  parameter int IR_DEPTH  = 1024
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               busy,
  output logic               done,
  // host access to the instruction RAM
  input  logic               ir_we,
  input  logic [ADDR_W-1:0]  ir_waddr,
  input  logic [INSTR_W-1:0] ir_wdata,
  // external memory (beat port)
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic               mem_req_we,
  output logic [EXT_AW-1:0]  mem_req_addr,
  output logic [MEM_W-1:0]   mem_req_wdata,
  input  logic               mem_rsp_valid,
  input  logic [MEM_W-1:0]   mem_rsp_rdata,
  // status
  output logic [ADDR_W-1:0]  pc,
  output logic [31:0]        stall_cycles,
  output logic [31:0]        instr_count,
  output logic               dma_busy,
  output logic               comp_busy
);

  localparam int IFM_W = NM / 2 * P_IFM * BW;
  localparam int W_W   = NM / 2 * P_OFM * BW;
  localparam int OFM_W = 4 * PSUM_W * NP;

  dma_cmd_t          dma_cmd;
  comp_cmd_t         comp_cmd;
  logic              dma_cmd_valid, dma_cmd_ready, comp_cmd_valid, comp_cmd_ready;
  logic              ifm_re, ifm_bank, w_re, w_bank;
  logic              ofm_re, ofm_rbank, ofm_we, ofm_wbank;
  logic [ADDR_W-1:0] ifm_raddr, w_raddr, ofm_raddr, ofm_waddr;
  logic [IFM_W-1:0]  ifm_rdata;
  logic [W_W-1:0]    w_rdata;
  logic [OFM_W-1:0]  ofm_rdata, ofm_wdata;
  ppm_ctl_t          ctl;
  logic              fpfu_out_valid;

  ccm #(.IR_DEPTH(IR_DEPTH)) u_ccm (
    .clk, .rst_n, .start, .busy, .done,
    .ir_we, .ir_waddr, .ir_wdata,
    .dma_cmd, .dma_cmd_valid, .dma_cmd_ready, .dma_busy,
    .comp_cmd, .comp_cmd_valid, .comp_cmd_ready, .comp_busy,
    .pc, .stall_cycles, .instr_count
  );

  memory_system #(
    .NM(NM), .NP(NP), .P_IFM(P_IFM), .P_OFM(P_OFM),
    .IFM_DEPTH(IFM_DEPTH), .W_DEPTH(W_DEPTH), .OFM_DEPTH(OFM_DEPTH)
  ) u_ms (
    .clk, .rst_n,
    .dma_cmd, .dma_cmd_valid, .dma_cmd_ready, .dma_busy,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata,
    .ifm_re, .ifm_bank, .ifm_raddr, .ifm_rdata,
    .w_re, .w_bank, .w_raddr, .w_rdata,
    .ofm_re, .ofm_rbank, .ofm_raddr, .ofm_rdata,
    .ofm_we, .ofm_wbank, .ofm_waddr, .ofm_wdata
  );

  fpfu_ctrl #(.NM(NM)) u_seq (
    .clk, .rst_n,
    .cmd (comp_cmd), .cmd_valid (comp_cmd_valid), .cmd_ready (comp_cmd_ready), .busy (comp_busy),
    .ifm_re, .ifm_bank, .ifm_raddr, .w_re, .w_bank, .w_raddr,
    .ofm_re, .ofm_rbank, .ofm_raddr, .ofm_we, .ofm_wbank, .ofm_waddr,
    .ctl, .fpfu_out_valid
  );

  fpfu #(.NM(NM), .NP(NP), .P_IFM(P_IFM), .P_OFM(P_OFM)) u_fpfu (
    .clk, .rst_n,
    .ifm_row   (ifm_rdata),
    .w_row     (w_rdata),
    .ctl       (ctl),
    .psum_row  (ofm_rdata),
    .out_valid (fpfu_out_valid),
    .out_row   (ofm_wdata)
  );

endmodule

// memory_system (MS): the DMA and the three ping-pong buffers.
//
//   IFMB  NM/2 * P_IFM * 8 bits per row (1536 by default), IFM_DEPTH rows
//   WB    NM/2 * P_OFM * 8 bits per row (3072 by default), W_DEPTH rows
//   OFMB  64 * NP bits per row (2048 by default), OFM_DEPTH rows
// each in two banks. The DMA writes all three (loads) and reads the OFMB
// (stores); the FPFU side reads the IFMB and WB and reads and writes the
// OFMB (partial results in, results out). The compute-side ports are
// brought out to the FPFU sequencer and the FPFU.
//
// From the paper: the memory system holds the DMA, IFMB, WB and OFMB, and the
// OFMB is both read and written by the compute side. Own choices: buffer
// depths and which ports are tied off.
module memory_system
  import lpfp_pkg::*;
#(
  parameter int NM        = NM_DEF,
  parameter int NP        = NP_DEF,
  parameter int P_IFM     = PIFM_DEF,
  parameter int P_OFM     = POFM_DEF,
  parameter int IFM_DEPTH = 1024,
  parameter int W_DEPTH   = 64,
  parameter int OFM_DEPTH = 1024,
  parameter int IFM_W     = NM / 2 * P_IFM * BW,
  parameter int W_W       = NM / 2 * P_OFM * BW,
  parameter int OFM_W     = 4 * PSUM_W * NP
) (
  input  logic              clk,
  input  logic              rst_n,
  // DMA command
  input  dma_cmd_t          dma_cmd,
  input  logic              dma_cmd_valid,
  output logic              dma_cmd_ready,
  output logic              dma_busy,
  // external memory
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [EXT_AW-1:0] mem_req_addr,
  output logic [MEM_W-1:0]  mem_req_wdata,
  input  logic              mem_rsp_valid,
  input  logic [MEM_W-1:0]  mem_rsp_rdata,
  // compute side
  input  logic              ifm_re,
  input  logic              ifm_bank,
  input  logic [ADDR_W-1:0] ifm_raddr,
  output logic [IFM_W-1:0]  ifm_rdata,
  input  logic              w_re,
  input  logic              w_bank,
  input  logic [ADDR_W-1:0] w_raddr,
  output logic [W_W-1:0]    w_rdata,
  input  logic              ofm_re,
  input  logic              ofm_rbank,
  input  logic [ADDR_W-1:0] ofm_raddr,
  output logic [OFM_W-1:0]  ofm_rdata,
  input  logic              ofm_we,
  input  logic              ofm_wbank,
  input  logic [ADDR_W-1:0] ofm_waddr,
  input  logic [OFM_W-1:0]  ofm_wdata
);

  logic              d_ifm_we, d_w_we, d_ofm_we, d_wbank, d_ofm_re, d_rbank;
  logic [ADDR_W-1:0] d_waddr, d_ofm_raddr;
  logic [IFM_W-1:0]  d_ifm_wdata, ifm_unused;
  logic [W_W-1:0]    d_w_wdata, w_unused;
  logic [OFM_W-1:0]  d_ofm_wdata, d_ofm_rdata;

  dma #(.IFM_W(IFM_W), .W_W(W_W), .OFM_W(OFM_W)) u_dma (
    .clk, .rst_n,
    .cmd (dma_cmd), .cmd_valid (dma_cmd_valid), .cmd_ready (dma_cmd_ready), .busy (dma_busy),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata,
    .ifm_we (d_ifm_we), .w_we (d_w_we), .ofm_we (d_ofm_we), .wbank (d_wbank), .waddr (d_waddr),
    .ifm_wdata (d_ifm_wdata), .w_wdata (d_w_wdata), .ofm_wdata (d_ofm_wdata),
    .ofm_re (d_ofm_re), .rbank (d_rbank), .ofm_raddr (d_ofm_raddr), .ofm_rdata (d_ofm_rdata)
  );

  pingpong_buffer #(.WIDTH(IFM_W), .DEPTH(IFM_DEPTH)) u_ifmb (
    .clk, .rst_n,
    .d_we (d_ifm_we), .d_wbank (d_wbank), .d_waddr (d_waddr), .d_wdata (d_ifm_wdata),
    .d_re (1'b0), .d_rbank (1'b0), .d_raddr ('0), .d_rdata (ifm_unused),
    .c_we (1'b0), .c_wbank (1'b0), .c_waddr ('0), .c_wdata ('0),
    .c_re (ifm_re), .c_rbank (ifm_bank), .c_raddr (ifm_raddr), .c_rdata (ifm_rdata)
  );

  pingpong_buffer #(.WIDTH(W_W), .DEPTH(W_DEPTH)) u_wb (
    .clk, .rst_n,
    .d_we (d_w_we), .d_wbank (d_wbank), .d_waddr (d_waddr), .d_wdata (d_w_wdata),
    .d_re (1'b0), .d_rbank (1'b0), .d_raddr ('0), .d_rdata (w_unused),
    .c_we (1'b0), .c_wbank (1'b0), .c_waddr ('0), .c_wdata ('0),
    .c_re (w_re), .c_rbank (w_bank), .c_raddr (w_raddr), .c_rdata (w_rdata)
  );

  pingpong_buffer #(.WIDTH(OFM_W), .DEPTH(OFM_DEPTH)) u_ofmb (
    .clk, .rst_n,
    .d_we (d_ofm_we), .d_wbank (d_wbank), .d_waddr (d_waddr), .d_wdata (d_ofm_wdata),
    .d_re (d_ofm_re), .d_rbank (d_rbank), .d_raddr (d_ofm_raddr), .d_rdata (d_ofm_rdata),
    .c_we (ofm_we), .c_wbank (ofm_wbank), .c_waddr (ofm_waddr), .c_wdata (ofm_wdata),
    .c_re (ofm_re), .c_rbank (ofm_rbank), .c_raddr (ofm_raddr), .c_rdata (ofm_rdata)
  );

endmodule

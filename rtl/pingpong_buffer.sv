// pingpong_buffer: two-bank on-chip buffer (used for IFMB, WB and OFMB).
//
// Each bank is DEPTH rows of WIDTH bits. The DMA side and the compute side
// each have a write port and a read port, and every port names the bank it
// uses. The ping-pong rule is that the DMA fills or drains one bank while
// the compute side works on the other, so transfers to and from external
// memory overlap computation; assertions flag a cycle in which both sides
// touch the same bank in a conflicting way. If both sides write one row in
// the same cycle the compute side wins. Reads are registered: data appear
// the cycle after the read enable and hold until the next read.
//
// Row addresses are ADDR_W bits; only the low clog2(DEPTH) bits are used.
// rst_n only disables the assertions during reset; the memory itself has
// no reset.
//
// From the paper: IFMB, WB and OFMB are ping-pong buffers that hide external
// memory time behind computation. Own choices: two explicitly selected banks
// with a port pair per side, the depths, and the assertions.
module pingpong_buffer
  import lpfp_pkg::*;
#(
  parameter int WIDTH = 1536,
  parameter int DEPTH = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  // DMA side
  input  logic              d_we,
  input  logic              d_wbank,
  input  logic [ADDR_W-1:0] d_waddr,
  input  logic [WIDTH-1:0]  d_wdata,
  input  logic              d_re,
  input  logic              d_rbank,
  input  logic [ADDR_W-1:0] d_raddr,
  output logic [WIDTH-1:0]  d_rdata,
  // compute side
  input  logic              c_we,
  input  logic              c_wbank,
  input  logic [ADDR_W-1:0] c_waddr,
  input  logic [WIDTH-1:0]  c_wdata,
  input  logic              c_re,
  input  logic              c_rbank,
  input  logic [ADDR_W-1:0] c_raddr,
  output logic [WIDTH-1:0]  c_rdata
);

  localparam int AW = (DEPTH <= 1) ? 1 : $clog2(DEPTH);

  logic [WIDTH-1:0] mem [2][DEPTH];

  always_ff @(posedge clk) begin
    if (d_we) mem[d_wbank][d_waddr[AW-1:0]] <= d_wdata;
    if (c_we) mem[c_wbank][c_waddr[AW-1:0]] <= c_wdata;
    if (d_re) d_rdata <= mem[d_rbank][d_raddr[AW-1:0]];
    if (c_re) c_rdata <= mem[c_rbank][c_raddr[AW-1:0]];
  end

  // Ping-pong discipline: the two sides never share a bank in one cycle.
  a_no_ww: assert property (@(posedge clk) disable iff (!rst_n) !(d_we && c_we && d_wbank == c_wbank))
    else $error("pingpong_buffer: both sides write bank %0d", d_wbank);
  a_no_dw_cr: assert property (@(posedge clk) disable iff (!rst_n) !(d_we && c_re && d_wbank == c_rbank))
    else $error("pingpong_buffer: DMA writes bank %0d while compute reads it", d_wbank);
  a_no_cw_dr: assert property (@(posedge clk) disable iff (!rst_n) !(c_we && d_re && c_wbank == d_rbank))
    else $error("pingpong_buffer: compute writes bank %0d while DMA reads it", c_wbank);

endmodule

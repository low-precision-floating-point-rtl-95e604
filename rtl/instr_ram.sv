// instr_ram (IR): instruction memory of the central control module.
//
// DEPTH words of INSTR_W bits, written by the host through one port and read
// by the CCM through the other. The read is registered: the word appears
// the cycle after re.
//
// From the paper: the CCM reads its instructions from an instruction RAM.
// Own choices: 1024 words of 128 bits and the host write port.
module instr_ram
  import lpfp_pkg::*;
#(
  parameter int DEPTH = 1024
) (
  input  logic               clk,
  input  logic               we,
  input  logic [ADDR_W-1:0]  waddr,
  input  logic [INSTR_W-1:0] wdata,
  input  logic               re,
  input  logic [ADDR_W-1:0]  raddr,
  output logic [INSTR_W-1:0] rdata
);

  localparam int AW = (DEPTH <= 1) ? 1 : $clog2(DEPTH);

  logic [INSTR_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr[AW-1:0]] <= wdata;
    if (re) rdata <= mem[raddr[AW-1:0]];
  end

endmodule

// ext_mem_model: behavioural model of the external DDR memory as seen
// through its controller: DEPTH beats of MEM_W bits, a request channel that
// is not always ready (random stalls), and read responses returned in
// order after a fixed latency. Testbenches fill and inspect `mem` directly.
module ext_mem_model
  import lpfp_pkg::*;
#(
  parameter int DEPTH   = 4096,
  parameter int LATENCY = 6
) (
  input  logic              clk,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  logic [EXT_AW-1:0] req_addr,
  input  logic [MEM_W-1:0]  req_wdata,
  output logic              rsp_valid,
  output logic [MEM_W-1:0]  rsp_rdata
);

  logic [MEM_W-1:0] mem [DEPTH];
  logic             pipe_v [LATENCY];
  logic [MEM_W-1:0] pipe_d [LATENCY];
  int               stalls = 0;

  initial begin
    for (int i = 0; i < LATENCY; i++) begin pipe_v[i] = 0; pipe_d[i] = '0; end
    req_ready = 1;
  end

  always @(posedge clk) begin
    if (req_valid && req_ready && req_we) mem[req_addr % DEPTH] <= req_wdata;
    pipe_v[0] <= req_valid && req_ready && !req_we;
    pipe_d[0] <= mem[req_addr % DEPTH];
    for (int i = 1; i < LATENCY; i++) begin
      pipe_v[i] <= pipe_v[i-1];
      pipe_d[i] <= pipe_d[i-1];
    end
    req_ready <= ($urandom_range(0, 7) != 0);
    if (!req_ready) stalls++;
  end

  assign rsp_valid = pipe_v[LATENCY-1];
  assign rsp_rdata = pipe_d[LATENCY-1];

endmodule

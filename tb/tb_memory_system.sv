// tb_memory_system: the DMA and the three buffers at their full row widths
// (IFMB 3 beats, WB 6 beats, OFMB 4 beats per row) with small depths,
// against a stalling external memory model. Loads into each buffer and bank
// are read back through the compute ports; rows written through the OFMB
// compute port are stored and compared in external memory. Also checks
// that a compute-side read of one bank during a DMA load into the other
// returns the old contents (ping-pong overlap).
module tb_memory_system;
  import lpfp_pkg::*;

  localparam int IFM_W = 1536, W_W = 3072, OFM_W = 2048;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  dma_cmd_t dma_cmd;
  logic dma_cmd_valid, dma_cmd_ready, dma_busy;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [EXT_AW-1:0] mem_req_addr;
  logic [MEM_W-1:0] mem_req_wdata, mem_rsp_rdata;
  logic ifm_re, ifm_bank, w_re, w_bank, ofm_re, ofm_rbank, ofm_we, ofm_wbank;
  logic [ADDR_W-1:0] ifm_raddr, w_raddr, ofm_raddr, ofm_waddr;
  logic [IFM_W-1:0] ifm_rdata;
  logic [W_W-1:0] w_rdata;
  logic [OFM_W-1:0] ofm_rdata, ofm_wdata;

  memory_system #(.IFM_DEPTH(16), .W_DEPTH(8), .OFM_DEPTH(16)) dut (.*);

  ext_mem_model #(.DEPTH(1024)) u_mem (
    .clk, .req_valid (mem_req_valid), .req_ready (mem_req_ready), .req_we (mem_req_we),
    .req_addr (mem_req_addr), .req_wdata (mem_req_wdata),
    .rsp_valid (mem_rsp_valid), .rsp_rdata (mem_rsp_rdata)
  );

  int checks = 0, failures = 0;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic dma_run(input buf_sel_e tgt, input logic store, input logic bank,
                         input int ext, input int baddr, input int rows);
    @(negedge clk);
    dma_cmd = '{target: tgt, store: store, bank: bank, ext_addr: EXT_AW'(ext),
                buf_addr: ADDR_W'(baddr), rows: ADDR_W'(rows)};
    dma_cmd_valid = 1;
    @(posedge clk);
    while (!dma_cmd_ready) @(posedge clk);
    @(negedge clk);
    dma_cmd_valid = 0;
    while (dma_busy) @(negedge clk);
  endtask

  function automatic logic [MEM_W-1:0] beat_of(input logic [4095:0] row, input int b);
    return row[b*MEM_W +: MEM_W];
  endfunction

  task automatic read_check(input buf_sel_e tgt, input logic bank, input int baddr, input int ext, input int beats);
    logic [4095:0] got, exp;
    @(negedge clk);
    {ifm_re, w_re, ofm_re} = '0;
    case (tgt)
      BUF_IFM: begin ifm_re = 1; ifm_bank = bank; ifm_raddr = ADDR_W'(baddr); end
      BUF_W:   begin w_re = 1;   w_bank = bank;   w_raddr = ADDR_W'(baddr); end
      default: begin ofm_re = 1; ofm_rbank = bank; ofm_raddr = ADDR_W'(baddr); end
    endcase
    @(negedge clk);
    {ifm_re, w_re, ofm_re} = '0;
    got = '0;
    case (tgt)
      BUF_IFM: got = 4096'(ifm_rdata);
      BUF_W:   got = 4096'(w_rdata);
      default: got = 4096'(ofm_rdata);
    endcase
    exp = '0;
    for (int b = 0; b < beats; b++) exp[b*MEM_W +: MEM_W] = u_mem.mem[ext + b];
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL buffer %0d bank %0d row %0d", tgt, bank, baddr);
    end
  endtask

  initial begin
    logic [OFM_W-1:0] rows_out [4];
    rst_n = 0;
    dma_cmd = '0; dma_cmd_valid = 0;
    {ifm_re, w_re, ofm_re, ofm_we} = '0;
    {ifm_bank, w_bank, ofm_rbank, ofm_wbank} = '0;
    ifm_raddr = '0; w_raddr = '0; ofm_raddr = '0; ofm_waddr = '0; ofm_wdata = '0;
    for (int i = 0; i < 1024; i++)
      u_mem.mem[i] = {16{$urandom}};
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // IFMB: 5 rows into bank 1 from beat 10, 3 rows into bank 0 from beat 40
    dma_run(BUF_IFM, 0, 1, 10, 2, 5);
    dma_run(BUF_IFM, 0, 0, 40, 0, 3);
    for (int r = 0; r < 5; r++) read_check(BUF_IFM, 1, 2 + r, 10 + 3 * r, 3);
    for (int r = 0; r < 3; r++) read_check(BUF_IFM, 0, r, 40 + 3 * r, 3);
    // WB: 4 rows each bank
    dma_run(BUF_W, 0, 0, 100, 0, 4);
    dma_run(BUF_W, 0, 1, 130, 4, 4);
    for (int r = 0; r < 4; r++) read_check(BUF_W, 0, r, 100 + 6 * r, 6);
    for (int r = 0; r < 4; r++) read_check(BUF_W, 1, 4 + r, 130 + 6 * r, 6);
    // OFMB load (biases)
    dma_run(BUF_OFM, 0, 0, 200, 3, 2);
    for (int r = 0; r < 2; r++) read_check(BUF_OFM, 0, 3 + r, 200 + 4 * r, 4);

    // compute side writes 4 rows into OFMB bank 1, DMA stores them
    for (int r = 0; r < 4; r++) begin
      @(negedge clk);
      rows_out[r] = {64{$urandom}};
      ofm_we = 1; ofm_wbank = 1; ofm_waddr = ADDR_W'(8 + r); ofm_wdata = rows_out[r];
    end
    @(negedge clk);
    ofm_we = 0;
    dma_run(BUF_OFM, 1, 1, 600, 8, 4);
    for (int r = 0; r < 4; r++)
      for (int b = 0; b < 4; b++) begin
        checks++;
        if (u_mem.mem[600 + 4 * r + b] != rows_out[r][b*MEM_W +: MEM_W]) begin
          failures++;
          $display("FAIL store row %0d beat %0d", r, b);
        end
      end

    // overlap: load IFMB bank 1 while the compute side reads bank 0
    fork
      dma_run(BUF_IFM, 0, 1, 300, 0, 6);
      begin
        repeat (4) read_check(BUF_IFM, 0, 1, 43, 3);
        checks++;
        if (!dma_busy) begin failures++; $display("FAIL no overlap"); end
      end
    join
    for (int r = 0; r < 6; r++) read_check(BUF_IFM, 1, r, 300 + 3 * r, 3);
    $display("memory stalls=%0d", u_mem.stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ccm: the central control module (and its instruction RAM) running a
// random program against mock DMA and FPFU units that stay busy for random
// times. Checks: every DMA and compute instruction reaches its unit once,
// in program order, with its fields intact; a WAIT lets the program go on
// only when the units it names are idle; HALT raises done only when both
// units are idle; the instruction counter matches the program; the stall
// counter moved.
module tb_ccm;
  import lpfp_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done, ir_we;
  logic [ADDR_W-1:0] ir_waddr, pc;
  logic [INSTR_W-1:0] ir_wdata;
  dma_cmd_t dma_cmd;
  comp_cmd_t comp_cmd;
  logic dma_cmd_valid, dma_cmd_ready, dma_busy, comp_cmd_valid, comp_cmd_ready, comp_busy;
  logic [31:0] stall_cycles, instr_count;

  ccm #(.IR_DEPTH(64)) dut (.*);

  int checks = 0, failures = 0;
  int dma_left = 0, comp_left = 0;
  dma_cmd_t exp_dma [$];
  comp_cmd_t exp_comp [$];
  instr_t prog [64];
  int nprog;

  // mock units
  assign dma_cmd_ready  = (dma_left == 0);
  assign dma_busy       = (dma_left != 0);
  assign comp_cmd_ready = (comp_left <= 1);
  assign comp_busy      = (comp_left != 0);
  always @(posedge clk) begin
    if (dma_cmd_valid && dma_cmd_ready) begin
      checks++;
      if (exp_dma.size() == 0 || exp_dma.pop_front() != dma_cmd) begin
        failures++; $display("FAIL unexpected DMA command");
      end
      dma_left <= $urandom_range(2, 12);
    end else if (dma_left != 0) dma_left <= dma_left - 1;
    if (comp_cmd_valid && comp_cmd_ready) begin
      checks++;
      if (exp_comp.size() == 0 || exp_comp.pop_front() != comp_cmd) begin
        failures++; $display("FAIL unexpected compute command");
      end
      comp_left <= $urandom_range(2, 15);
    end else if (comp_left != 0) comp_left <= comp_left - 1;
  end

  // WAIT and HALT rules, checked when the CCM moves past them
  logic [ADDR_W-1:0] pc_q;
  always @(posedge clk) begin
    pc_q <= pc;
    if (busy && dut.state == 2'd2 && (dut.advance || dut.finish)) begin
      instr_t ins;
      wait_cmd_t w;
      ins = prog[pc];
      w = wait_cmd_t'(ins.body[1:0]);
      if (ins.op == OP_WAIT) begin
        checks++;
        if ((w.wait_dma && dma_busy) || (w.wait_comp && comp_busy)) begin
          failures++; $display("FAIL WAIT passed with a busy unit");
        end
      end
      if (ins.op == OP_HALT) begin
        checks++;
        if (dma_busy || comp_busy) begin failures++; $display("FAIL HALT with a busy unit"); end
      end
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; ir_we = 0; ir_waddr = '0; ir_wdata = '0;
    nprog = 40;
    for (int i = 0; i < nprog; i++) begin
      instr_t ins;
      dma_cmd_t dc;
      comp_cmd_t cc;
      wait_cmd_t wc;
      ins = '0;
      case ((i == nprog - 1) ? 6 : $urandom_range(0, 5))
        0, 1: begin
          dc = dma_cmd_t'({$urandom, $urandom, $urandom});
          case ($urandom_range(0, 3))
            0: begin ins.op = OP_LOAD_IFM;  dc.target = BUF_IFM; dc.store = 0; end
            1: begin ins.op = OP_LOAD_W;    dc.target = BUF_W;   dc.store = 0; end
            2: begin ins.op = OP_LOAD_OFM;  dc.target = BUF_OFM; dc.store = 0; end
            default: begin ins.op = OP_STORE_OFM; dc.target = BUF_OFM; dc.store = 1; end
          endcase
          ins.body = BODY_W'(dc);
          exp_dma.push_back(dc);
        end
        2, 3: begin
          cc = comp_cmd_t'({$urandom, $urandom, $urandom, $urandom});
          ins.op = OP_COMPUTE;
          ins.body = BODY_W'(cc);
          exp_comp.push_back(cc);
        end
        4: begin
          wc = wait_cmd_t'($urandom_range(1, 3));
          ins.op = OP_WAIT;
          ins.body = BODY_W'(wc);
        end
        5: ins.op = OP_NOP;
        default: ins.op = OP_HALT;
      endcase
      prog[i] = ins;
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < nprog; i++) begin
      @(negedge clk);
      ir_we = 1; ir_waddr = ADDR_W'(i); ir_wdata = INSTR_W'(prog[i]);
    end
    @(negedge clk);
    ir_we = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (exp_dma.size() != 0 || exp_comp.size() != 0) begin failures++; $display("FAIL commands not issued"); end
    checks++;
    if (instr_count != 32'(nprog)) begin failures++; $display("FAIL instr_count %0d", instr_count); end
    checks++;
    if (stall_cycles == 0) begin failures++; $display("FAIL no stall counted"); end
    checks++;
    if (busy) failures++;
    $display("stall_cycles=%0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

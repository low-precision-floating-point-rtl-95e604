// tb_lpfp_processor: end-to-end run of the processor at its default size
// (NM = 96, NP = 32, P_IFM = 4, P_OFM = 8).
//
// External memory is filled with random M4E3 activations and weights (laid
// out as buffer rows) and 16-bit biases. A program of 19 instructions then
// runs a small convolution schedule:
//   * biases into OFMB bank 0; two input-channel rounds of 9 kernel
//     positions into IFMB/WB bank 0;
//   * round 1 starts from the bias and leaves a 16-bit partial result;
//     round 2 starts from that partial result, applies ReLU and opens a
//     max-pooling window; a third block closes the window;
//   * meanwhile the DMA loads bank 1 (ping-pong overlap), later blocks use
//     bank 1, one with a small output scale so results saturate, and an
//     OFMB store of bank 0 overlaps a compute block writing bank 1;
//   * WAIT instructions keep the OFMB read-after-write order and the bank
//     hand-over; HALT ends the run.
// A block-level model of the instruction set, written independently of the
// RTL, executes the same program on the same data; every stored beat is
// compared. The test also counts how often each mechanism happened (bias
// start, partial start, partial write, pooling, ReLU clamp, saturation,
// DMA/compute overlap, WAIT stall, both banks in use) and fails if any
// never happened.
module tb_lpfp_processor;
  import lpfp_pkg::*;
  import lpfp_ref_pkg::*;

  localparam int NM = NM_DEF, NP = NP_DEF, P_IFM = PIFM_DEF, P_OFM = POFM_DEF;
  localparam int NCH = NM / 4;
  localparam int IFM_W = NM / 2 * P_IFM * 8, W_W = NM / 2 * P_OFM * 8, OFM_W = 64 * NP;
  localparam int B_IFM = (IFM_W + MEM_W - 1) / MEM_W;
  localparam int B_W = (W_W + MEM_W - 1) / MEM_W;
  localparam int B_OFM = (OFM_W + MEM_W - 1) / MEM_W;
  localparam int MEMD = 1024;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done, ir_we;
  logic [ADDR_W-1:0] ir_waddr, pc;
  logic [INSTR_W-1:0] ir_wdata;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [EXT_AW-1:0] mem_req_addr;
  logic [MEM_W-1:0] mem_req_wdata, mem_rsp_rdata;
  logic [31:0] stall_cycles, instr_count;
  logic dma_busy, comp_busy;

  lpfp_processor dut (.*);

  ext_mem_model #(.DEPTH(MEMD)) u_mem (
    .clk, .req_valid (mem_req_valid), .req_ready (mem_req_ready), .req_we (mem_req_we),
    .req_addr (mem_req_addr), .req_wdata (mem_req_wdata),
    .rsp_valid (mem_rsp_valid), .rsp_rdata (mem_rsp_rdata)
  );

  int checks = 0, failures = 0, cycles = 0;

  // ---------------------------------------------------------------- model
  logic [MEM_W-1:0] xmem [MEMD];            // model of external memory
  logic [IFM_W-1:0] m_ifm [2][64];
  logic [W_W-1:0]   m_w   [2][64];
  logic [OFM_W-1:0] m_ofm [2][64];
  longint           m_pool [NP][4];
  instr_t           prog [$];
  int n_bias = 0, n_pinit = 0, n_pwrite = 0, n_pool = 0, n_relu = 0, n_sat = 0;
  int n_overlap = 0, n_bank1 = 0;

  function automatic logic [7:0] rand_lpfp();
    return {1'($urandom), 4'($urandom), 3'($urandom_range(0, 3))};
  endfunction

  function automatic logic [4095:0] read_row(input int ext, input int beats);
    logic [4095:0] r = '0;
    for (int b = 0; b < beats; b++) r[b*MEM_W +: MEM_W] = xmem[ext + b];
    return r;
  endfunction

  task automatic model_run(input instr_t ins);
    dma_cmd_t dc;
    comp_cmd_t cc;
    dc = dma_cmd_t'(ins.body[$bits(dma_cmd_t)-1:0]);
    cc = comp_cmd_t'(ins.body[$bits(comp_cmd_t)-1:0]);
    case (ins.op)
      OP_LOAD_IFM: for (int r = 0; r < int'(dc.rows); r++)
                     m_ifm[dc.bank][int'(dc.buf_addr) + r] = IFM_W'(read_row(int'(dc.ext_addr) + r * B_IFM, B_IFM));
      OP_LOAD_W:   for (int r = 0; r < int'(dc.rows); r++)
                     m_w[dc.bank][int'(dc.buf_addr) + r] = W_W'(read_row(int'(dc.ext_addr) + r * B_W, B_W));
      OP_LOAD_OFM: for (int r = 0; r < int'(dc.rows); r++)
                     m_ofm[dc.bank][int'(dc.buf_addr) + r] = OFM_W'(read_row(int'(dc.ext_addr) + r * B_OFM, B_OFM));
      OP_STORE_OFM: for (int r = 0; r < int'(dc.rows); r++)
                      for (int b = 0; b < B_OFM; b++)
                        xmem[int'(dc.ext_addr) + r * B_OFM + b] =
                          (4096'(m_ofm[dc.bank][int'(dc.buf_addr) + r]) >> (b * MEM_W));
      OP_COMPUTE: begin
        logic [OFM_W-1:0] res;
        bit write;
        res = m_ofm[cc.ofm_bank][cc.ofm_wr_addr];
        write = !cc.final_out || !cc.pool_en || cc.pool_last;
        if (cc.ifm_bank || cc.w_bank || cc.ofm_bank) n_bank1++;
        if (cc.init_psum) begin if (cc.ofm_rd_addr < 4) n_bias++; else n_pinit++; end
        if (!cc.final_out) n_pwrite++;
        if (cc.pool_en) n_pool++;
        for (int g = 0; g < P_IFM; g++) for (int o = 0; o < P_OFM; o++) begin
          int p;
          longint acc [4];
          p = g * P_OFM + o;
          for (int j = 0; j < 4; j++) begin
            logic [15:0] ps;
            ps = m_ofm[cc.ofm_bank][cc.ofm_rd_addr][p*64 + j*16 +: 16];
            acc[j] = cc.init_psum ? (longint'($signed(ps)) <<< cc.psum_shift) : 0;
          end
          for (int k = 0; k < int'(cc.len); k++) begin
            logic [IFM_W-1:0] ar;
            logic [W_W-1:0] wr;
            ar = m_ifm[cc.ifm_bank][int'(cc.ifm_addr) + k];
            wr = m_w[cc.w_bank][int'(cc.w_addr) + k];
            for (int i = 0; i < NCH; i++) begin
              longint a0, a1, w0, w1;
              a0 = lpfp_units(ar[g*NM*4 + i*8 +: 8]);
              a1 = lpfp_units(ar[g*NM*4 + (NCH+i)*8 +: 8]);
              w0 = lpfp_units(wr[o*NM*4 + i*8 +: 8]);
              w1 = lpfp_units(wr[o*NM*4 + (NCH+i)*8 +: 8]);
              acc[0] = sat32(acc[0] + a0 * w0);
              acc[1] = sat32(acc[1] + a1 * w0);
              acc[2] = sat32(acc[2] + a0 * w1);
              acc[3] = sat32(acc[3] + a1 * w1);
            end
          end
          for (int j = 0; j < 4; j++) begin
            longint v;
            logic [7:0] q;
            if (!cc.final_out) res[p*64 + j*16 +: 16] = ref_psum(acc[j], cc.psum_shift);
            else begin
              if (!cc.pool_en || cc.pool_first) m_pool[p][j] = acc[j];
              else if (acc[j] > m_pool[p][j]) m_pool[p][j] = acc[j];
              v = m_pool[p][j];
              if (cc.relu && v < 0) begin v = 0; n_relu++; end
              q = ref_quant(v, cc.out_frac);
              if (q[6:0] == 7'h7f && write) n_sat++;
              res[p*64 + j*16 +: 16] = {8'h00, q};
            end
          end
        end
        if (write) m_ofm[cc.ofm_bank][cc.ofm_wr_addr] = res;
      end
      default: ;
    endcase
  endtask

  // ---------------------------------------------------------------- program
  function automatic instr_t i_dma(input opcode_e op, input logic bank, input int ext,
                                   input int baddr, input int rows);
    dma_cmd_t dc;
    dc = '{target: (op == OP_LOAD_IFM) ? BUF_IFM : (op == OP_LOAD_W) ? BUF_W : BUF_OFM,
           store: (op == OP_STORE_OFM), bank: bank, ext_addr: EXT_AW'(ext),
           buf_addr: ADDR_W'(baddr), rows: ADDR_W'(rows)};
    return '{op: op, body: BODY_W'(dc)};
  endfunction

  function automatic instr_t i_wait(input bit wd, input bit wc);
    wait_cmd_t w;
    w = '{wait_dma: wd, wait_comp: wc};
    return '{op: OP_WAIT, body: BODY_W'(w)};
  endfunction

  function automatic instr_t i_comp(input comp_cmd_t cc);
    return '{op: OP_COMPUTE, body: BODY_W'(cc)};
  endfunction

  localparam int X_B = 0, X_I0 = 16, X_W0 = 80, X_I1 = 200, X_W1 = 240, X_O0 = 400, X_O1 = 440;

  task automatic build_program();
    comp_cmd_t c;
    prog.push_back(i_dma(OP_LOAD_OFM, 0, X_B, 0, 2));
    prog.push_back(i_dma(OP_LOAD_IFM, 0, X_I0, 0, 18));
    prog.push_back(i_dma(OP_LOAD_W, 0, X_W0, 0, 18));
    prog.push_back(i_wait(1, 0));
    prog.push_back(i_dma(OP_LOAD_IFM, 1, X_I1, 0, 9));
    // round 1: bias start, partial result to OFMB row 4
    c = '0; c.len = 9; c.ifm_addr = 0; c.w_addr = 0; c.ofm_rd_addr = 0; c.ofm_wr_addr = 4;
    c.init_psum = 1; c.psum_shift = 10;
    prog.push_back(i_comp(c));
    prog.push_back(i_dma(OP_LOAD_W, 1, X_W1, 0, 9));
    prog.push_back(i_wait(0, 1));           // row 4 must be written before it is read
    // round 2: partial start, ReLU, opens a pooling window
    c = '0; c.len = 9; c.ifm_addr = 9; c.w_addr = 9; c.ofm_rd_addr = 4; c.ofm_wr_addr = 5;
    c.init_psum = 1; c.psum_shift = 10; c.final_out = 1; c.relu = 1;
    c.pool_en = 1; c.pool_first = 1; c.out_frac = 12;
    prog.push_back(i_comp(c));
    // closes the window (bias row 1 start), writes OFMB row 5
    c = '0; c.len = 9; c.ifm_addr = 0; c.w_addr = 9; c.ofm_rd_addr = 1; c.ofm_wr_addr = 5;
    c.init_psum = 1; c.psum_shift = 10; c.final_out = 1; c.relu = 1;
    c.pool_en = 1; c.pool_last = 1; c.out_frac = 12;
    prog.push_back(i_comp(c));
    prog.push_back(i_wait(1, 1));
    // bank 1, zero start, small output scale: saturation
    c = '0; c.len = 9; c.ifm_bank = 1; c.w_bank = 1; c.ofm_bank = 1; c.ofm_wr_addr = 0;
    c.final_out = 1; c.out_frac = 7;
    prog.push_back(i_comp(c));
    prog.push_back(i_dma(OP_STORE_OFM, 0, X_O0, 4, 2));   // overlaps the next block
    c = '0; c.len = 9; c.ifm_bank = 1; c.w_bank = 1; c.ofm_bank = 1; c.ofm_wr_addr = 1;
    c.final_out = 1; c.relu = 1; c.out_frac = 13;
    prog.push_back(i_comp(c));
    c = '0; c.len = 5; c.ifm_addr = 2; c.ifm_bank = 1; c.w_addr = 4; c.w_bank = 1; c.ofm_bank = 1;
    c.ofm_wr_addr = 2; c.psum_shift = 8;
    prog.push_back(i_comp(c));
    prog.push_back(i_wait(1, 1));
    prog.push_back(i_dma(OP_STORE_OFM, 1, X_O1, 0, 3));
    prog.push_back(i_wait(1, 0));
    prog.push_back('{op: OP_HALT, body: '0});
  endtask

  // ---------------------------------------------------------------- run
  always @(posedge clk) begin
    cycles <= cycles + 1;
    if (dma_busy && comp_busy) n_overlap++;
  end

  initial begin
    #4000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    rst_n = 0; start = 0; ir_we = 0; ir_waddr = '0; ir_wdata = '0;
    // data: activations and weights as rows of random small M4E3 values,
    // biases as random 16-bit values
    for (int i = 0; i < MEMD; i++) xmem[i] = '0;
    for (int r = 0; r < 2 * B_OFM; r++)
      for (int k = 0; k < MEM_W / 16; k++) xmem[X_B + r][k*16 +: 16] = 16'($signed($urandom_range(0, 4000)) - 2000);
    for (int r = X_I0; r < X_W1 + 9 * B_W; r++)
      for (int k = 0; k < MEM_W / 8; k++) xmem[r][k*8 +: 8] = rand_lpfp();
    for (int i = 0; i < MEMD; i++) u_mem.mem[i] = xmem[i];
    build_program();
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    foreach (prog[i]) begin
      @(negedge clk);
      ir_we = 1; ir_waddr = ADDR_W'(i); ir_wdata = INSTR_W'(prog[i]);
    end
    @(negedge clk);
    ir_we = 0; start = 1;
    t0 = cycles;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    $display("run took %0d cycles, %0d instructions, %0d stall cycles", cycles - t0, instr_count, stall_cycles);
    foreach (prog[i]) model_run(prog[i]);
    for (int a = X_O0; a < X_O1 + 3 * B_OFM; a++) begin
      checks++;
      if (u_mem.mem[a] != xmem[a]) begin
        failures++;
        if (failures < 8) $display("FAIL beat %0d differs", a);
      end
    end
    checks++;
    if (instr_count != 32'(prog.size())) failures++;
    $display("bias_start=%0d partial_start=%0d partial_write=%0d pool_blocks=%0d relu_clamps=%0d saturations=%0d overlap_cycles=%0d wait_stalls=%0d bank1_blocks=%0d mem_stalls=%0d",
             n_bias, n_pinit, n_pwrite, n_pool, n_relu, n_sat, n_overlap, stall_cycles, n_bank1, u_mem.stalls);
    if (n_bias == 0)   begin failures++; $display("FAIL no bias start"); end
    if (n_pinit == 0)  begin failures++; $display("FAIL no partial start"); end
    if (n_pwrite == 0) begin failures++; $display("FAIL no partial write"); end
    if (n_pool == 0)   begin failures++; $display("FAIL no pooling"); end
    if (n_relu == 0)   begin failures++; $display("FAIL no ReLU clamp"); end
    if (n_sat == 0)    begin failures++; $display("FAIL no saturation"); end
    if (n_overlap == 0) begin failures++; $display("FAIL no DMA/compute overlap"); end
    if (stall_cycles == 0) begin failures++; $display("FAIL no WAIT stall"); end
    if (n_bank1 == 0)  begin failures++; $display("FAIL bank 1 unused"); end
    checks += 9;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

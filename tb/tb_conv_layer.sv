// tb_conv_layer: one VGG-style layer on the full-size processor: 3x3
// convolution with zero padding, bias, ReLU and 2x2 max pooling, with 48
// input channels (two rounds of the 24 a PE takes per cycle) and 16 output
// channels, on a 4 x 8 input.
//
// The testbench acts as the layer compiler. It lays the tensors out in
// external memory as buffer rows and writes the program:
//   * one OFMB row of biases (each PE slot gets the bias of its channel);
//   * IFMB rows: for pool position q (0..3) of every 2x2 window, input
//     round r (0..1) and kernel position k (0..8), row q*18 + r*9 + k holds,
//     for PE group g, the 24 channels of round r at the kernel tap of
//     pooled pixel 2g (pixel a) and 2g+1 (pixel b); padding taps are 0;
//   * WB rows r*9 + k: for PE o, the kernels of output channels 2o (c) and
//     2o+1 (d);
//   * four round-1 blocks (bias start, 16-bit partial result each in its
//     own OFMB row), WAIT, four round-2 blocks (partial start, ReLU, one
//     pooling window over the four), store, HALT.
// The expected outputs are computed directly from the tensors: the
// convolution sum of each round in exact 2^-12 units, the partial result
// rounded to 16 bits as the format defines it, the second round added, the
// 2x2 maximum taken, ReLU, and the nearest M4E3 code. All 128 pooled
// outputs (8 pixels x 16 channels) are compared, and the run time is
// reported.
module tb_conv_layer;
  import lpfp_pkg::*;
  import lpfp_ref_pkg::*;

  localparam int NM = NM_DEF, NP = NP_DEF, P_IFM = PIFM_DEF, P_OFM = POFM_DEF;
  localparam int NCH = NM / 4;
  localparam int IFM_W = NM / 2 * P_IFM * 8, W_W = NM / 2 * P_OFM * 8, OFM_W = 64 * NP;
  localparam int B_IFM = (IFM_W + MEM_W - 1) / MEM_W;
  localparam int B_W = (W_W + MEM_W - 1) / MEM_W;
  localparam int B_OFM = (OFM_W + MEM_W - 1) / MEM_W;
  localparam int MEMD = 512;
  localparam int H = 4, W = 2 * P_IFM, IC = 2 * NCH, OC = 2 * P_OFM;
  localparam int SHIFT = 6, FRAC = 12;
  localparam int X_B = 0, X_I = 16, X_W = X_I + 72 * B_IFM + 8, X_O = 400;

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
  logic [7:0]  x [H][W][IC];          // input activations (M4E3)
  logic [7:0]  wk [OC][9][IC];        // kernels (M4E3)
  logic [15:0] bias [OC];             // 16-bit fixed, LSB 2^-SHIFT
  instr_t prog [$];

  always @(posedge clk) cycles <= cycles + 1;

  function automatic logic [7:0] rand_lpfp();
    return {1'($urandom), 4'($urandom), 3'($urandom_range(0, 3))};
  endfunction

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

  // input activation at output pixel (oy, ox), tap k, channel c; 0 in the padding
  function automatic logic [7:0] tap(input int oy, input int ox, input int k, input int c);
    int iy, ix;
    iy = oy + k / 3 - 1;
    ix = ox + k % 3 - 1;
    if (iy < 0 || iy >= H || ix < 0 || ix >= W) return 8'h00;
    return x[iy][ix][c];
  endfunction

  // output pixel of pooled pixel s (row-major over 2 x W/2) at pool position q
  function automatic int opix_y(input int s, input int q); return 2 * (s / (W / 2)) + q / 2; endfunction
  function automatic int opix_x(input int s, input int q); return 2 * (s % (W / 2)) + q % 2; endfunction

  // convolution sum of one input round, exact, in 2^-12 units
  function automatic longint conv_round(input int oy, input int ox, input int oc, input int r);
    longint acc = 0;
    for (int k = 0; k < 9; k++)
      for (int i = 0; i < NCH; i++)
        acc += longint'(lpfp_units(tap(oy, ox, k, r * NCH + i))) * lpfp_units(wk[oc][k][r * NCH + i]);
    return acc;
  endfunction

  initial begin
    #4000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [MEM_W-1:0] xm [MEMD];
    int t0, nrelu;
    comp_cmd_t c;
    rst_n = 0; start = 0; ir_we = 0; ir_waddr = '0; ir_wdata = '0;
    nrelu = 0;
    foreach (x[i, j, k]) x[i][j][k] = rand_lpfp();
    foreach (wk[i, j, k]) wk[i][j][k] = rand_lpfp();
    foreach (bias[i]) bias[i] = 16'($urandom_range(0, 256)) - 16'd128;
    for (int i = 0; i < MEMD; i++) xm[i] = '0;
    // biases: PE g*P_OFM+o, slots ac, bc -> channel 2o; ad, bd -> 2o+1
    begin
      logic [OFM_W-1:0] row;
      for (int p = 0; p < NP; p++)
        for (int j = 0; j < 4; j++) row[p*64 + j*16 +: 16] = bias[2 * (p % P_OFM) + j / 2];
      for (int b = 0; b < B_OFM; b++) xm[X_B + b] = row[b*MEM_W +: MEM_W];
    end
    // IFMB rows
    for (int q = 0; q < 4; q++) for (int r = 0; r < 2; r++) for (int k = 0; k < 9; k++) begin
      logic [B_IFM*MEM_W-1:0] row;
      int n;
      row = '0;
      n = q * 18 + r * 9 + k;
      for (int g = 0; g < P_IFM; g++) for (int i = 0; i < NCH; i++) begin
        row[g*NM*4 + i*8 +: 8]         = tap(opix_y(2*g, q), opix_x(2*g, q), k, r * NCH + i);
        row[g*NM*4 + (NCH+i)*8 +: 8]   = tap(opix_y(2*g+1, q), opix_x(2*g+1, q), k, r * NCH + i);
      end
      for (int b = 0; b < B_IFM; b++) xm[X_I + n * B_IFM + b] = row[b*MEM_W +: MEM_W];
    end
    // WB rows
    for (int r = 0; r < 2; r++) for (int k = 0; k < 9; k++) begin
      logic [B_W*MEM_W-1:0] row;
      row = '0;
      for (int o = 0; o < P_OFM; o++) for (int i = 0; i < NCH; i++) begin
        row[o*NM*4 + i*8 +: 8]       = wk[2*o][k][r * NCH + i];
        row[o*NM*4 + (NCH+i)*8 +: 8] = wk[2*o+1][k][r * NCH + i];
      end
      for (int b = 0; b < B_W; b++) xm[X_W + (r * 9 + k) * B_W + b] = row[b*MEM_W +: MEM_W];
    end
    for (int i = 0; i < MEMD; i++) u_mem.mem[i] = xm[i];

    // program
    prog.push_back(i_dma(OP_LOAD_OFM, 0, X_B, 0, 1));
    prog.push_back(i_dma(OP_LOAD_IFM, 0, X_I, 0, 72));
    prog.push_back(i_dma(OP_LOAD_W, 0, X_W, 0, 18));
    prog.push_back(i_wait(1, 0));
    for (int q = 0; q < 4; q++) begin
      c = '0; c.ifm_addr = ADDR_W'(q * 18); c.w_addr = 0; c.len = 9;
      c.ofm_rd_addr = 0; c.ofm_wr_addr = ADDR_W'(2 + q); c.init_psum = 1; c.psum_shift = SHIFT;
      prog.push_back('{op: OP_COMPUTE, body: BODY_W'(c)});
    end
    prog.push_back(i_wait(0, 1));
    for (int q = 0; q < 4; q++) begin
      c = '0; c.ifm_addr = ADDR_W'(q * 18 + 9); c.w_addr = 9; c.len = 9;
      c.ofm_rd_addr = ADDR_W'(2 + q); c.ofm_wr_addr = 1; c.init_psum = 1; c.psum_shift = SHIFT;
      c.final_out = 1; c.relu = 1; c.pool_en = 1; c.pool_first = (q == 0); c.pool_last = (q == 3);
      c.out_frac = FRAC;
      prog.push_back('{op: OP_COMPUTE, body: BODY_W'(c)});
    end
    prog.push_back(i_wait(0, 1));
    prog.push_back(i_dma(OP_STORE_OFM, 0, X_O, 1, 1));
    prog.push_back(i_wait(1, 0));
    prog.push_back('{op: OP_HALT, body: '0});

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
    $display("layer took %0d cycles (%0d MACs, %0d multiplier-cycles available)",
             cycles - t0, 8 * 4 * OC * 9 * IC, (cycles - t0) * NM * NP);

    // compare the pooled outputs with the direct computation
    for (int s = 0; s < 2 * P_IFM; s++) for (int oc = 0; oc < OC; oc++) begin
      longint best, v;
      logic [7:0] e, got;
      int p, j;
      logic [B_OFM*MEM_W-1:0] orow;
      for (int q = 0; q < 4; q++) begin
        longint part;
        part = (longint'($signed(bias[oc])) <<< SHIFT) + conv_round(opix_y(s, q), opix_x(s, q), oc, 0);
        v = (longint'($signed(ref_psum(part, SHIFT))) <<< SHIFT) + conv_round(opix_y(s, q), opix_x(s, q), oc, 1);
        if (q == 0 || v > best) best = v;
      end
      if (best < 0) begin best = 0; nrelu++; end
      e = ref_quant(best, FRAC);
      p = (s / 2) * P_OFM + oc / 2;
      j = (s % 2) + 2 * (oc % 2);
      for (int b = 0; b < B_OFM; b++) orow[b*MEM_W +: MEM_W] = u_mem.mem[X_O + b];
      got = orow[p*64 + j*16 +: 8];
      checks++;
      if (got !== e || orow[p*64 + j*16 + 8 +: 8] != 8'h00) begin
        failures++;
        if (failures < 10) $display("FAIL pixel %0d channel %0d: %h expected %h", s, oc, got, e);
      end
    end
    checks++;
    if (nrelu == 0) begin failures++; $display("FAIL no output was clamped by ReLU"); end
    $display("relu_clamped=%0d stall_cycles=%0d", nrelu, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

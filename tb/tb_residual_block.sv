// tb_residual_block: the end of a ResNet bottleneck on the full-size
// processor: a 1x1 convolution from 48 to 16 channels, its bias, the
// shortcut addition and ReLU, for 8 pixels.
//
// The processor has no separate adder for the shortcut. The testbench, in
// the role of the compiler, adds it as one more input round of the same
// block: the IFMB row of that round carries the 16 shortcut channels of
// each pixel and the WB row an identity kernel (weight 1.0, which M4E3
// holds exactly, where input channel = output channel, 0 elsewhere). The
// block is therefore three rows long: two rounds of 24 input channels and
// the shortcut round, started from the bias, converted with ReLU.
// The expected outputs come straight from the tensors: bias + the exact
// 1x1 convolution + the shortcut value, ReLU, nearest M4E3 code. All 128
// outputs are compared.
module tb_residual_block;
  import lpfp_pkg::*;
  import lpfp_ref_pkg::*;

  localparam int NM = NM_DEF, NP = NP_DEF, P_IFM = PIFM_DEF, P_OFM = POFM_DEF;
  localparam int NCH = NM / 4;
  localparam int IFM_W = NM / 2 * P_IFM * 8, W_W = NM / 2 * P_OFM * 8, OFM_W = 64 * NP;
  localparam int B_IFM = (IFM_W + MEM_W - 1) / MEM_W;
  localparam int B_W = (W_W + MEM_W - 1) / MEM_W;
  localparam int B_OFM = (OFM_W + MEM_W - 1) / MEM_W;
  localparam int MEMD = 128;
  localparam int NPIX = 2 * P_IFM, IC = 2 * NCH, OC = 2 * P_OFM;
  localparam int SHIFT = 6, FRAC = 12;
  localparam int X_B = 0, X_I = 16, X_W = 40, X_O = 80;

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
  logic [7:0]  x [NPIX][IC];           // input activations (M4E3)
  logic [7:0]  sc [NPIX][OC];           // shortcut activations (M4E3)
  logic [7:0]  wk [OC][IC];             // 1x1 kernels (M4E3)
  logic [15:0] bias [OC];               // 16-bit fixed, LSB 2^-SHIFT
  localparam logic [7:0] ONE = 8'h03;   // S=0, M=0, E=3: 1.0
  instr_t      prog [$];

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

  // IFMB byte of round r, channel i of the round, pixel s
  function automatic logic [7:0] in_byte(input int r, input int s, input int i);
    if (r < 2) return x[s][r * NCH + i];
    return (i < OC) ? sc[s][i] : 8'h00;
  endfunction

  // WB byte of round r, channel i of the round, output channel oc
  function automatic logic [7:0] w_byte(input int r, input int oc, input int i);
    if (r < 2) return wk[oc][r * NCH + i];
    return (i == oc) ? ONE : 8'h00;
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
    foreach (x[i, k]) x[i][k] = rand_lpfp();
    foreach (sc[i, k]) sc[i][k] = rand_lpfp();
    foreach (wk[i, k]) wk[i][k] = rand_lpfp();
    foreach (bias[i]) bias[i] = 16'($urandom_range(0, 256)) - 16'd128;
    for (int i = 0; i < MEMD; i++) xm[i] = '0;
    begin
      logic [OFM_W-1:0] row;
      for (int p = 0; p < NP; p++)
        for (int j = 0; j < 4; j++) row[p*64 + j*16 +: 16] = bias[2 * (p % P_OFM) + j / 2];
      for (int b = 0; b < B_OFM; b++) xm[X_B + b] = row[b*MEM_W +: MEM_W];
    end
    for (int r = 0; r < 3; r++) begin
      logic [B_IFM*MEM_W-1:0] arow;
      logic [B_W*MEM_W-1:0] wrow;
      arow = '0;
      wrow = '0;
      for (int g = 0; g < P_IFM; g++) for (int i = 0; i < NCH; i++) begin
        arow[g*NM*4 + i*8 +: 8]       = in_byte(r, 2*g, i);
        arow[g*NM*4 + (NCH+i)*8 +: 8] = in_byte(r, 2*g+1, i);
      end
      for (int o = 0; o < P_OFM; o++) for (int i = 0; i < NCH; i++) begin
        wrow[o*NM*4 + i*8 +: 8]       = w_byte(r, 2*o, i);
        wrow[o*NM*4 + (NCH+i)*8 +: 8] = w_byte(r, 2*o+1, i);
      end
      for (int b = 0; b < B_IFM; b++) xm[X_I + r * B_IFM + b] = arow[b*MEM_W +: MEM_W];
      for (int b = 0; b < B_W; b++) xm[X_W + r * B_W + b] = wrow[b*MEM_W +: MEM_W];
    end
    for (int i = 0; i < MEMD; i++) u_mem.mem[i] = xm[i];

    prog.push_back(i_dma(OP_LOAD_OFM, 0, X_B, 0, 1));
    prog.push_back(i_dma(OP_LOAD_IFM, 0, X_I, 0, 3));
    prog.push_back(i_dma(OP_LOAD_W, 0, X_W, 0, 3));
    prog.push_back(i_wait(1, 0));
    c = '0; c.len = 3; c.ofm_rd_addr = 0; c.ofm_wr_addr = 1; c.init_psum = 1; c.psum_shift = SHIFT;
    c.final_out = 1; c.relu = 1; c.out_frac = FRAC;
    prog.push_back('{op: OP_COMPUTE, body: BODY_W'(c)});
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
    $display("block took %0d cycles", cycles - t0);

    for (int s = 0; s < NPIX; s++) for (int oc = 0; oc < OC; oc++) begin
      longint v;
      logic [7:0] e, got;
      int p, j;
      logic [B_OFM*MEM_W-1:0] orow;
      v = longint'($signed(bias[oc])) <<< SHIFT;
      for (int i = 0; i < IC; i++) v += longint'(lpfp_units(x[s][i])) * lpfp_units(wk[oc][i]);
      v += longint'(lpfp_units(sc[s][oc])) << 6;     // shortcut, 2^-6 -> 2^-12 units
      if (v < 0) begin v = 0; nrelu++; end
      e = ref_quant(v, FRAC);
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
    $display("relu_clamped=%0d", nrelu);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pe: one PE at the full size (NM = 96: 24 input channels, 2 pixels,
// 2 output channels). Random M4E3 activations and weights stream in one
// row per cycle; blocks of 1..9 beats end as 16-bit partial results or as
// final M4E3 outputs (ReLU on or off). The testbench delays the PPM control
// by pe_latency cycles, as the sequencer does, and checks all four output
// slots (ac, bc, ad, bd) against dot products of the decoded values, and
// that each result appears 2 cycles after its last beat reaches the PPMs.
module tb_pe;
  import lpfp_pkg::*;
  import lpfp_ref_pkg::*;

  localparam int NM = 96, NCH = NM / 4, LAT = pe_latency(NM);

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  logic [NM/2-1:0][BW-1:0] act, wt;
  ppm_ctl_t ctl;
  logic [3:0][PSUM_W-1:0] psum_in;
  logic out_valid;
  logic [3:0][PSUM_W-1:0] out_data;

  pe #(.NM(NM)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  ppm_ctl_t ctl_pipe [LAT];
  logic [3:0][PSUM_W-1:0] psum_pipe [LAT];
  ppm_ctl_t ctl_now;
  logic [3:0][PSUM_W-1:0] psum_now;
  int exp_cyc [$];
  logic [3:0][15:0] exp_val [$];

  always @(posedge clk) cycle <= cycle + 1;

  // delay line standing in for the sequencer's tag pipeline
  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin
      ctl_pipe[i] <= ctl_pipe[i-1];
      psum_pipe[i] <= psum_pipe[i-1];
    end
    ctl_pipe[0] <= ctl_now;
    psum_pipe[0] <= psum_now;
  end
  assign ctl = ctl_pipe[LAT-1];
  assign psum_in = psum_pipe[LAT-1];

  always @(posedge clk) if (rst_n) begin
    #1;
    if (out_valid) begin
      int ec;
      logic [3:0][15:0] ev;
      checks++;
      if (exp_cyc.size() == 0) begin
        failures++;
        $display("FAIL unexpected output");
      end else begin
        ec = exp_cyc.pop_front();
        ev = exp_val.pop_front();
        if (ec != cycle || ev != out_data) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d exp %0d: %h exp %h", cycle, ec, out_data, ev);
        end
      end
    end
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint acc [4];
    rst_n = 0;
    ctl_now = '0; psum_now = '0; act = '0; wt = '0;
    for (int i = 0; i < LAT; i++) begin ctl_pipe[i] = '0; psum_pipe[i] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int blk = 0; blk < 80; blk++) begin
      int len;
      ppm_cfg_t cfg;
      len = $urandom_range(1, 9);
      cfg = '0;
      cfg.init_psum  = $urandom_range(0, 1);
      cfg.final_out  = $urandom_range(0, 1);
      cfg.relu       = $urandom_range(0, 1);
      cfg.psum_shift = 5'($urandom_range(6, 14));
      cfg.out_frac   = 6'($urandom_range(12, 22));
      for (int j = 0; j < 4; j++) acc[j] = 0;
      for (int k = 0; k < len; k++) begin
        for (int i = 0; i < NM / 2; i++) begin
          act[i] = 8'($urandom);
          wt[i]  = 8'($urandom);
        end
        psum_now = '0;
        if (k == 0) begin
          for (int j = 0; j < 4; j++) begin
            psum_now[j] = 16'($urandom);
            if (cfg.init_psum) acc[j] = longint'($signed(psum_now[j])) <<< cfg.psum_shift;
          end
        end
        for (int i = 0; i < NCH; i++) begin
          acc[0] += longint'(lpfp_units(act[i]))       * longint'(lpfp_units(wt[i]));
          acc[1] += longint'(lpfp_units(act[NCH+i]))   * longint'(lpfp_units(wt[i]));
          acc[2] += longint'(lpfp_units(act[i]))       * longint'(lpfp_units(wt[NCH+i]));
          acc[3] += longint'(lpfp_units(act[NCH+i]))   * longint'(lpfp_units(wt[NCH+i]));
        end
        ctl_now = '{valid: 1'b1, first: (k == 0), last: (k == len - 1), cfg: cfg};
        @(posedge clk);
        #1;
      end
      begin
        logic [3:0][15:0] ev;
        for (int j = 0; j < 4; j++) begin
          longint a;
          a = acc[j];
          if (!cfg.final_out) ev[j] = ref_psum(a, cfg.psum_shift);
          else begin
            if (cfg.relu && a < 0) a = 0;
            ev[j] = {8'h00, ref_quant(a, cfg.out_frac)};
          end
        end
        // last operands were at the PE input in cycle `cycle - 1`
        exp_cyc.push_back(cycle - 1 + LAT + 2);
        exp_val.push_back(ev);
      end
      ctl_now = '0;
      repeat ($urandom_range(0, 3)) @(posedge clk);
      #1;
    end
    repeat (LAT + 6) @(posedge clk);
    #2;
    checks++;
    if (exp_cyc.size() != 0) begin
      failures++;
      $display("FAIL %0d outputs missing", exp_cyc.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

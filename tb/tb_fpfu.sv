// tb_fpfu: a small FPFU (NM = 8, NP = 4 as 2 groups of 2 PEs) checks how
// IFMB and WB slices are shared: PE g*P_OFM+o must compute with activation
// slice g and weight slice o. Blocks of 1..4 beats with random data; every
// PE's four outputs are compared with reference dot products, and the
// result timing with pe_latency + 2.
module tb_fpfu;
  import lpfp_pkg::*;
  import lpfp_ref_pkg::*;

  localparam int NM = 8, NP = 4, P_IFM = 2, P_OFM = 2, NCH = NM / 4;
  localparam int LAT = pe_latency(NM);

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  logic [P_IFM-1:0][NM/2-1:0][BW-1:0] ifm_row;
  logic [P_OFM-1:0][NM/2-1:0][BW-1:0] w_row;
  ppm_ctl_t ctl;
  logic [NP-1:0][3:0][PSUM_W-1:0] psum_row;
  logic out_valid;
  logic [NP-1:0][3:0][PSUM_W-1:0] out_row;

  fpfu #(.NM(NM), .NP(NP), .P_IFM(P_IFM), .P_OFM(P_OFM)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  ppm_ctl_t ctl_pipe [LAT];
  ppm_ctl_t ctl_now;
  int exp_cyc [$];
  logic [NP-1:0][3:0][15:0] exp_val [$];

  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) ctl_pipe[i] <= ctl_pipe[i-1];
    ctl_pipe[0] <= ctl_now;
  end
  assign ctl = ctl_pipe[LAT-1];
  assign psum_row = '0;

  always @(posedge clk) if (rst_n) begin
    #1;
    if (out_valid) begin
      int ec;
      logic [NP-1:0][3:0][15:0] ev;
      if (exp_cyc.size() == 0) begin
        failures++;
        checks++;
      end else begin
        ec = exp_cyc.pop_front();
        ev = exp_val.pop_front();
        checks++;
        if (ec != cycle) failures++;
        for (int p = 0; p < NP; p++) for (int j = 0; j < 4; j++) begin
          checks++;
          if (ev[p][j] != out_row[p][j]) begin
            failures++;
            if (failures < 10) $display("FAIL pe %0d slot %0d: %h exp %h", p, j, out_row[p][j], ev[p][j]);
          end
        end
      end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint acc [NP][4];
    rst_n = 0;
    ctl_now = '0; ifm_row = '0; w_row = '0;
    for (int i = 0; i < LAT; i++) ctl_pipe[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int blk = 0; blk < 100; blk++) begin
      int len;
      ppm_cfg_t cfg;
      len = $urandom_range(1, 4);
      cfg = '0;
      cfg.final_out = 1;
      cfg.out_frac  = 6'($urandom_range(10, 14));
      for (int p = 0; p < NP; p++) for (int j = 0; j < 4; j++) acc[p][j] = 0;
      for (int k = 0; k < len; k++) begin
        ifm_row = {$urandom, $urandom};
        w_row   = {$urandom, $urandom};
        for (int g = 0; g < P_IFM; g++) for (int o = 0; o < P_OFM; o++)
          for (int i = 0; i < NCH; i++) begin
            int p;
            p = g * P_OFM + o;
            acc[p][0] += longint'(lpfp_units(ifm_row[g][i]))     * longint'(lpfp_units(w_row[o][i]));
            acc[p][1] += longint'(lpfp_units(ifm_row[g][NCH+i])) * longint'(lpfp_units(w_row[o][i]));
            acc[p][2] += longint'(lpfp_units(ifm_row[g][i]))     * longint'(lpfp_units(w_row[o][NCH+i]));
            acc[p][3] += longint'(lpfp_units(ifm_row[g][NCH+i])) * longint'(lpfp_units(w_row[o][NCH+i]));
          end
        ctl_now = '{valid: 1'b1, first: (k == 0), last: (k == len - 1), cfg: cfg};
        @(posedge clk);
        #1;
      end
      begin
        logic [NP-1:0][3:0][15:0] ev;
        for (int p = 0; p < NP; p++) for (int j = 0; j < 4; j++)
          ev[p][j] = {8'h00, ref_quant(acc[p][j], cfg.out_frac)};
        exp_cyc.push_back(cycle - 1 + LAT + 2);
        exp_val.push_back(ev);
      end
      ctl_now = '0;
      repeat ($urandom_range(0, 2)) @(posedge clk);
      #1;
    end
    repeat (LAT + 6) @(posedge clk);
    #2;
    checks++;
    if (exp_cyc.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

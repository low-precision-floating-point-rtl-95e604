// tb_fpfu_ctrl: random compute blocks, offered back to back or with gaps.
// For every accepted block the testbench predicts, cycle by cycle, the
// IFMB/WB read addresses, the OFMB bias/partial read (D-1 cycles after the
// first read, D = 1 + pe_latency), the PPM tags (D cycles after each read)
// and the OFMB result write (D+2 cycles after the last read, skipped inside
// an open pooling window), and compares every cycle. It also checks that
// blocks are accepted without a bubble and that busy clears at the end.
module tb_fpfu_ctrl;
  import lpfp_pkg::*;

  localparam int NM = 96, D = 1 + pe_latency(NM), S = D + 2;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  comp_cmd_t cmd;
  logic cmd_valid, cmd_ready, busy;
  logic ifm_re, ifm_bank, w_re, w_bank, ofm_re, ofm_rbank, ofm_we, ofm_wbank;
  logic [ADDR_W-1:0] ifm_raddr, w_raddr, ofm_raddr, ofm_waddr;
  ppm_ctl_t ctl;
  logic fpfu_out_valid;

  fpfu_ctrl #(.NM(NM)) dut (.*);

  int checks = 0, failures = 0, cycle = 0, issue_end = 0, n_back_to_back = 0;
  // expectations keyed by cycle
  logic [ADDR_W-1:0] e_ifm [int];
  logic [ADDR_W-1:0] e_w [int];
  logic [ADDR_W-1:0] e_ofm_rd [int];
  logic [ADDR_W-1:0] e_ofm_wr [int];
  logic [2:0]        e_ctl [int];   // {valid, first, last}

  always @(posedge clk) cycle <= cycle + 1;
  always_comb fpfu_out_valid = e_ofm_wr.exists(cycle);

  task automatic expect_eq(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 12) $display("FAIL cycle %0d %s got %h exp %h", cycle, what, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nblk;
    bit accepted;
    accepted = 0;
    rst_n = 0; cmd = '0; cmd_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    nblk = 0;
    while (nblk < 150 || cycle < issue_end + S + 4) begin
      @(negedge clk);
      if (accepted) begin
        cmd_valid = 0;
        accepted = 0;
      end
      if (!cmd_valid && nblk < 150 && $urandom_range(0, 3) != 0) begin
        cmd = comp_cmd_t'({$urandom, $urandom, $urandom, $urandom});
        cmd.len = ADDR_W'($urandom_range(1, 5));
        cmd_valid = 1;
      end
      #1;
      // compare this cycle
      expect_eq("ifm_re", ifm_re, e_ifm.exists(cycle));
      if (e_ifm.exists(cycle)) begin
        expect_eq("ifm_addr", ifm_raddr, e_ifm[cycle]);
        expect_eq("w_addr", w_raddr, e_w[cycle]);
        expect_eq("w_re", w_re, 1);
      end
      expect_eq("ofm_re", ofm_re, e_ofm_rd.exists(cycle));
      if (e_ofm_rd.exists(cycle)) expect_eq("ofm_raddr", ofm_raddr, e_ofm_rd[cycle]);
      expect_eq("ctl", {ctl.valid, ctl.first & ctl.valid, ctl.last & ctl.valid},
                e_ctl.exists(cycle) ? e_ctl[cycle] : 3'b000);
      expect_eq("ofm_we", ofm_we, e_ofm_wr.exists(cycle));
      if (e_ofm_wr.exists(cycle)) expect_eq("ofm_waddr", ofm_waddr, e_ofm_wr[cycle]);
      // acceptance
      if (cmd_valid && cmd_ready) begin
        int t0;
        t0 = cycle + 1;
        if (t0 == issue_end + 1 && nblk > 0) n_back_to_back++;
        if (t0 < issue_end + 1) begin failures++; $display("FAIL overlapping issue"); end
        for (int k = 0; k < int'(cmd.len); k++) begin
          e_ifm[t0 + k] = cmd.ifm_addr + ADDR_W'(k);
          e_w[t0 + k]   = cmd.w_addr + ADDR_W'(k);
          e_ctl[t0 + k + D] = {1'b1, k == 0, k == int'(cmd.len) - 1};
        end
        if (cmd.init_psum) e_ofm_rd[t0 + D - 1] = cmd.ofm_rd_addr;
        if (!cmd.final_out || !cmd.pool_en || cmd.pool_last)
          e_ofm_wr[t0 + int'(cmd.len) - 1 + S] = cmd.ofm_wr_addr;
        issue_end = t0 + int'(cmd.len) - 1;
        nblk++;
        accepted = 1;
      end
    end
    checks++;
    if (busy) begin failures++; $display("FAIL busy at the end"); end
    checks++;
    if (n_back_to_back == 0) begin failures++; $display("FAIL no back-to-back blocks"); end
    $display("back_to_back=%0d", n_back_to_back);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

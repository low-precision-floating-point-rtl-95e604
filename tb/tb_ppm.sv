// tb_ppm: random blocks through one post process module. Each block has
// 1..6 beats, starts from a 16-bit bias/partial result or from zero, and
// ends either as a 16-bit partial result or as a final M4E3 output after
// max pooling over windows of 1..3 blocks and optional ReLU. A reference
// model computes each written value and the cycle it must appear in (2
// cycles after the last beat); blocks inside an open pooling window must
// write nothing.
module tb_ppm;
  import lpfp_pkg::*;
  import lpfp_ref_pkg::*;

  localparam int IN_W = 28;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  ppm_ctl_t ctl;
  logic signed [IN_W-1:0] sum;
  logic [PSUM_W-1:0] psum_in;
  logic out_valid;
  logic [PSUM_W-1:0] out_data;

  ppm #(.IN_W(IN_W)) dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  int exp_cyc [$];
  logic [15:0] exp_val [$];
  int n_partial = 0, n_final = 0, n_pool = 0, n_relu_neg = 0;

  always @(posedge clk) cycle <= cycle + 1;

  // monitor
  always @(posedge clk) if (rst_n) begin
    #1;
    if (out_valid) begin
      checks++;
      if (exp_cyc.size() == 0) begin
        failures++;
        $display("FAIL unexpected output %h at %0d", out_data, cycle);
      end else begin
        int ec;
        logic [15:0] ev;
        ec = exp_cyc.pop_front();
        ev = exp_val.pop_front();
        if (ec != cycle || ev != out_data) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d (exp %0d) data %h exp %h", cycle, ec, out_data, ev);
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
    longint acc, pool_v, act;
    bit in_window;
    int win_left;
    rst_n = 0;
    ctl = '0; sum = '0; psum_in = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    in_window = 0; win_left = 0; pool_v = 0;
    for (int blk = 0; blk < 600; blk++) begin
      int len;
      ppm_cfg_t cfg;
      len = $urandom_range(1, 6);
      cfg = '0;
      cfg.init_psum  = $urandom_range(0, 1);
      cfg.psum_shift = 5'($urandom_range(0, 12));
      cfg.out_frac   = 6'($urandom_range(6, 22));
      cfg.relu       = $urandom_range(0, 1);
      if (in_window) begin
        cfg.final_out = 1; cfg.pool_en = 1; cfg.pool_first = 0;
        win_left--;
        cfg.pool_last = (win_left == 0);
      end else begin
        cfg.final_out = $urandom_range(0, 2) != 0;
        cfg.pool_en = cfg.final_out && $urandom_range(0, 1);
        if (cfg.pool_en) begin
          cfg.pool_first = 1;
          win_left = $urandom_range(0, 2);
          cfg.pool_last = (win_left == 0);
        end
      end
      in_window = cfg.pool_en && !cfg.pool_last;
      psum_in = 16'($urandom);
      acc = cfg.init_psum ? longint'($signed(psum_in)) <<< cfg.psum_shift : 0;
      for (int k = 0; k < len; k++) begin
        sum = IN_W'($urandom) >>> $urandom_range(0, 12);
        if (blk % 50 == 7) sum = {1'b0, {(IN_W-1){1'b1}}};   // drive toward saturation
        acc = sat32(acc + longint'(sum));
        ctl.valid = 1; ctl.first = (k == 0); ctl.last = (k == len - 1); ctl.cfg = cfg;
        @(posedge clk);
        #1;
        if (k == 0) psum_in = 16'($urandom);  // only read with the first beat
      end
      // expected result
      if (!cfg.final_out) begin
        exp_cyc.push_back(cycle + 1);
        exp_val.push_back(ref_psum(acc, cfg.psum_shift));
        n_partial++;
      end else begin
        if (!cfg.pool_en || cfg.pool_first) pool_v = acc;
        else if (acc > pool_v) pool_v = acc;
        if (cfg.pool_en) n_pool++;
        if (!cfg.pool_en || cfg.pool_last) begin
          act = pool_v;
          if (cfg.relu && act < 0) begin act = 0; n_relu_neg++; end
          exp_cyc.push_back(cycle + 1);
          exp_val.push_back({8'h00, ref_quant(act, cfg.out_frac)});
          n_final++;
        end
      end
      ctl = '0;
      repeat ($urandom_range(0, 2)) @(posedge clk);
      #1;
    end
    repeat (5) @(posedge clk);
    #2;
    checks++;
    if (exp_cyc.size() != 0) begin
      failures++;
      $display("FAIL %0d outputs missing", exp_cyc.size());
    end
    $display("partial=%0d final=%0d pooled=%0d relu_clamped=%0d", n_partial, n_final, n_pool, n_relu_neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

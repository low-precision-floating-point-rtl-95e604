// tb_align_module: products of real M4E3 pairs, formed in the testbench
// from the hidden-bit definition, must align to the exact fixed-point
// product (LSB 2^-12) after one clock; the latency is checked as well.
module tb_align_module;
  import lpfp_pkg::*;
  import lpfp_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  lpfp_prod_t prod;
  logic signed [AM_W-1:0] fixed;
  int checks = 0, failures = 0;

  align_module dut (.*);

  function automatic lpfp_prod_t make_prod(input logic [7:0] x, input logic [7:0] y);
    int hx, hy, mx, my, ex, ey;
    lpfp_prod_t p;
    hx = (x[2:0] != 0); hy = (y[2:0] != 0);
    mx = (hx << 4) + x[6:3]; my = (hy << 4) + y[6:3];
    ex = (x[2:0] == 0) ? 1 : x[2:0];
    ey = (y[2:0] == 0) ? 1 : y[2:0];
    p.s = x[7] ^ y[7];
    p.m = 10'(mx * my);
    p.e = 4'(ex + ey);
    return p;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] x, y;
    longint exp_v, prev_v;
    prod = '0;
    @(posedge clk);
    #1;
    prev_v = longint'(fixed);
    for (int i = 0; i < 65536; i++) begin
      x = i[7:0]; y = i[15:8];
      prod = make_prod(x, y);
      exp_v = longint'(lpfp_units(x)) * longint'(lpfp_units(y));
      #1;
      // registered output: unchanged until the clock edge
      checks++;
      if (longint'(fixed) != prev_v) failures++;
      @(posedge clk);
      #1;
      checks++;
      if (longint'(fixed) != exp_v) begin
        failures++;
        if (failures < 10) $display("FAIL x=%h y=%h got %0d exp %0d", x, y, fixed, exp_v);
      end
      prev_v = exp_v;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

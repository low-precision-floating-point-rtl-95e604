// tb_lpfp_quad_mul: every pair of M4E3 codes for (a, c), with random b and
// d, checked against the exact product of the decoded values. The product
// word must equal +-m * 2^(e-2) in units of 2^-12, the mantissa must stay
// below 1024 and the sign must be the XOR of the input signs.
module tb_lpfp_quad_mul;
  import lpfp_pkg::*;
  import lpfp_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  lpfp_t a, b, c, d;
  lpfp_prod_t p_ac, p_ad, p_bc, p_bd;
  int checks = 0, failures = 0;

  lpfp_quad_mul dut (.*);

  function automatic longint prod_units(input lpfp_prod_t p);
    longint v = longint'(p.m) <<< (int'(p.e) - 2);
    return p.s ? -v : v;
  endfunction

  task automatic check(input string name, input lpfp_prod_t p, input lpfp_t x, input lpfp_t y);
    longint exp_v = longint'(lpfp_units(x)) * longint'(lpfp_units(y));
    checks++;
    if (prod_units(p) != exp_v || p.s != (x.s ^ y.s)) begin
      failures++;
      if (failures < 10) $display("FAIL %s x=%h y=%h got %0d exp %0d", name, x, y, prod_units(p), exp_v);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 65536; i++) begin
      a = lpfp_t'(i[7:0]);
      c = lpfp_t'(i[15:8]);
      b = lpfp_t'($urandom);
      d = lpfp_t'($urandom);
      @(posedge clk);
      #1;
      check("ac", p_ac, a, c);
      check("ad", p_ad, a, d);
      check("bc", p_bc, b, c);
      check("bd", p_bd, b, d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_data_converter: fixed-point values with random fraction counts, plus
// ties, saturation and subnormal boundaries, against an exhaustive nearest
// code search.
module tb_data_converter;
  import lpfp_pkg::*;
  import lpfp_ref_pkg::*;

  logic signed [31:0] x;
  logic [5:0] frac;
  lpfp_t y;
  int checks = 0, failures = 0;

  data_converter dut (.*);

  task automatic try(input longint xv, input int f);
    logic [7:0] e;
    x = 32'(xv);
    frac = 6'(f);
    #1;
    e = ref_quant(longint'(x), f);
    checks++;
    if (8'(y) != e) begin
      failures++;
      if (failures < 10) $display("FAIL x=%0d frac=%0d got %h exp %h", x, f, y, e);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // every LPFP value and every midpoint between neighbours, at frac 12
    for (int c = 0; c < 128; c++) begin
      try(longint'(lpfp_units(8'(c))) * 64, 12);
      try(-longint'(lpfp_units(8'(c))) * 64, 12);
      try(longint'(lpfp_units(8'(c))) * 64 + 32, 12);
      try(-longint'(lpfp_units(8'(c))) * 64 - 32, 12);
      try(longint'(lpfp_units(8'(c))) * 64 + 33, 12);
    end
    try(32'sh7fffffff, 0);
    try(-32'sh80000000, 0);
    try(-32'sh80000000, 63);
    try(1, 0);
    try(0, 5);
    for (int i = 0; i < 20000; i++) begin
      int f;
      longint v;
      f = $urandom_range(0, 40);
      v = longint'($signed($urandom)) >>> $urandom_range(0, 31);
      try(v, f);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pingpong_buffer: a small two-bank buffer. The DMA side fills one bank
// while the compute side reads and writes the other, then the banks swap.
// Every read (registered, one cycle) is compared with a shadow copy, which
// also shows that the two banks are independent.
module tb_pingpong_buffer;
  import lpfp_pkg::*;

  localparam int WIDTH = 72, DEPTH = 16;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  initial #12 rst_n = 1'b1;
  logic d_we, d_wbank, d_re, d_rbank, c_we, c_wbank, c_re, c_rbank;
  logic [ADDR_W-1:0] d_waddr, d_raddr, c_waddr, c_raddr;
  logic [WIDTH-1:0] d_wdata, d_rdata, c_wdata, c_rdata;

  pingpong_buffer #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  logic [WIDTH-1:0] shadow [2][DEPTH];
  int checks = 0, failures = 0, swaps = 0;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic dbank;
    logic [WIDTH-1:0] exp_d, exp_c;
    logic chk_d, chk_c;
    {d_we, d_re, c_we, c_re} = '0;
    {d_wbank, d_rbank, c_wbank, c_rbank} = '0;
    d_waddr = '0; d_raddr = '0; c_waddr = '0; c_raddr = '0; d_wdata = '0; c_wdata = '0;
    // initialise both banks through the DMA side
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        d_we = 1; d_wbank = 1'(b); d_waddr = ADDR_W'(a);
        d_wdata = {$urandom, $urandom, $urandom};
        shadow[b][a] = d_wdata;
      end
    @(negedge clk);
    d_we = 0;
    dbank = 0;
    chk_d = 0; chk_c = 0;
    for (int t = 0; t < 3000; t++) begin
      if (t % 100 == 99) begin dbank = ~dbank; swaps++; end
      @(negedge clk);
      // results of last cycle's reads
      if (chk_d) begin checks++; if (d_rdata !== exp_d) failures++; end
      if (chk_c) begin checks++; if (c_rdata !== exp_c) failures++; end
      d_wbank = dbank; d_rbank = dbank; c_wbank = ~dbank; c_rbank = ~dbank;
      d_we = $urandom_range(0, 1); d_waddr = ADDR_W'($urandom_range(0, DEPTH - 1));
      d_wdata = {$urandom, $urandom, $urandom};
      d_re = !d_we && $urandom_range(0, 1); d_raddr = ADDR_W'($urandom_range(0, DEPTH - 1));
      c_we = $urandom_range(0, 1); c_waddr = ADDR_W'($urandom_range(0, DEPTH - 1));
      c_wdata = {$urandom, $urandom, $urandom};
      c_re = $urandom_range(0, 1); c_raddr = ADDR_W'($urandom_range(0, DEPTH - 1));
      // reads return the contents before this cycle's writes
      chk_d = d_re; exp_d = shadow[d_rbank][d_raddr[3:0]];
      chk_c = c_re; exp_c = shadow[c_rbank][c_raddr[3:0]];
      if (d_we) shadow[d_wbank][d_waddr[3:0]] = d_wdata;
      if (c_we) shadow[c_wbank][c_waddr[3:0]] = c_wdata;
    end
    $display("swaps=%0d", swaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

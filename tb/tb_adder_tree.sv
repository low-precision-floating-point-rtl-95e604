// tb_adder_tree: random 23-bit inputs (including the extremes) into a
// 24-input tree; each sum must appear exactly clog2(24) = 5 cycles later,
// with a new input set every cycle (checked one clock edge after the
// inputs are captured plus four more).
module tb_adder_tree;
  localparam int N = 24, IN_W = 23, LAT = 5, OUT_W = IN_W + 5;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [N-1:0][IN_W-1:0] din;
  logic signed [OUT_W-1:0] sum;
  longint expq [$];
  int checks = 0, failures = 0;

  adder_tree #(.N(N), .IN_W(IN_W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint s;
    for (int t = 0; t < 400; t++) begin
      s = 0;
      for (int i = 0; i < N; i++) begin
        case (t % 4)
          0: din[i] = IN_W'($urandom);
          1: din[i] = {1'b0, {(IN_W-1){1'b1}}};          // all maximal
          2: din[i] = {1'b1, {(IN_W-1){1'b0}}};          // all minimal
          default: din[i] = IN_W'($urandom_range(0, 15)) - IN_W'(8);
        endcase
        s += longint'($signed(din[i]));
      end
      expq.push_back(s);
      @(posedge clk);
      #1;
      if (t >= LAT - 1) begin
        checks++;
        if (longint'(sum) != expq[t-LAT+1]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d got %0d exp %0d", t, sum, expq[t-LAT+1]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

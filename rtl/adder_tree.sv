// adder_tree: pipelined sum of N two's complement inputs.
//
// The inputs are zero-padded to the next power of two and summed pairwise,
// one register per level, so the sum appears clog2(N) cycles after its
// inputs and a new set is accepted every cycle. The output grows by
// clog2(N) bits and never overflows. In a PE, N = N_m/4 aligned products
// (23 bits) form one dot-product term of an output pixel.
//
// From the paper: one adder tree per output after the alignment modules.
// Own choices: the binary structure, a register per level, and an output one
// bit wider (28) than the 27 bits the paper quotes, so 24 full-size products
// can never overflow.
module adder_tree #(
  parameter int N     = 24,
  parameter int IN_W  = 23,
  parameter int OUT_W = IN_W + ((N <= 1) ? 1 : $clog2(N))
) (
  input  logic                    clk,
  input  logic [N-1:0][IN_W-1:0]  din,
  output logic signed [OUT_W-1:0] sum
);

  localparam int L  = (N <= 1) ? 1 : $clog2(N);
  localparam int NP = 1 << L;

  for (genvar k = 0; k <= L; k++) begin : g_lvl
    logic signed [OUT_W-1:0] v [NP >> k];
    if (k == 0) begin : g_in
      always_comb
        for (int i = 0; i < NP; i++)
          v[i] = (i < N) ? OUT_W'($signed(din[i])) : '0;
    end else begin : g_add
      always_ff @(posedge clk)
        for (int i = 0; i < (NP >> k); i++)
          v[i] <= g_lvl[k-1].v[2*i] + g_lvl[k-1].v[2*i+1];
    end
  end

  assign sum = g_lvl[L].v[0];

endmodule

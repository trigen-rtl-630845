// trigen_mac_1d: one array of the MAC processing array (MPA).
//
// Multiplies an IN0 vector (IFM) element by element with an IN1 vector (W),
// sums the N products in a binary adder tree and, in parallel, adds the two
// shared exponents. The output is (EXP, SUM) with value SUM * 2^(EXP-127):
// the exponent adder removes one bias of 127, so integer operands, which carry
// exponent 127, give EXP = 127. The structure (N multipliers, N:1 adder tree,
// separate exponent adder) follows the paper's MPA figure; operands are 9-bit
// signed so that both INT8/MXINT8 and UINT8/UINT4 elements fit.
// Purely combinational; the accumulator that follows registers the result.
module trigen_mac_1d
  import trigen_pkg::*;
#(
  parameter int N = VEC
) (
  input  logic signed [A_W-1:0]                 ifm [N],
  input  logic        [7:0]                     ifm_exp,
  input  logic signed [A_W-1:0]                 w   [N],
  input  logic        [7:0]                     w_exp,
  output logic signed [2*A_W+$clog2(N)-1:0]     sum,
  output logic signed [9:0]                     exp_sum
);
  localparam int PW = 2*A_W;
  localparam int SW = 2*A_W + $clog2(N);

  logic signed [PW-1:0] prod [N];

  always_comb begin
    for (int i = 0; i < N; i++) prod[i] = ifm[i] * w[i];
  end

  // adder tree, one level per halving
  localparam int LV = $clog2(N);
  logic signed [SW-1:0] tree [LV+1][N];
  always_comb begin
    for (int l = 0; l <= LV; l++)
      for (int i = 0; i < N; i++) tree[l][i] = '0;
    for (int i = 0; i < N; i++) tree[0][i] = SW'(prod[i]);
    for (int l = 1; l <= LV; l++)
      for (int i = 0; i < (N >> l); i++)
        tree[l][i] = tree[l-1][2*i] + tree[l-1][2*i+1];
  end

  assign sum     = tree[LV][0];
  assign exp_sum = $signed({2'b0, ifm_exp}) + $signed({2'b0, w_exp}) - 10'sd127;
endmodule

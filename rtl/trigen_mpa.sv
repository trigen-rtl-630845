// trigen_mpa: MAC processing array with its accumulators.
//
// N arrays (trigen_mac_1d) of N multipliers each. The IN1 tile w_tile (N rows
// of N elements, held stationary by the caller's WBUF) gives array j its
// weight vector; each valid cycle one IN0 row vector is broadcast to all
// arrays, so the MPA computes N dot products per cycle and array j adds its
// result into ACC register acc_idx. After a command, rd_idx selects one IN0
// row and rd_row returns the N FI32 partial sums of that row (column j from
// array j). Operand signedness comes from the element types. Sizes follow the
// paper: 32 x 32 MACs and 64 ACC registers per array.
module trigen_mpa
  import trigen_pkg::*;
#(
  parameter int N    = VEC,
  parameter int REGS = ACC_REGS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  word_t                   in_word,     // IN0 block: N bytes + shared exponent
  input  dtype_e                  in_t,
  input  logic                    acc_clear,
  input  logic [$clog2(REGS)-1:0] acc_idx,
  input  word_t                   w_tile [N],  // stationary IN1 tile, row j -> array j
  input  dtype_e                  w_t,
  input  logic [$clog2(REGS)-1:0] rd_idx,
  output fi32_t                   rd_row [N]
);
  localparam int SW = 2*A_W + $clog2(N);

  logic signed [A_W-1:0] ifm [N];
  always_comb for (int i = 0; i < N; i++) ifm[i] = elem_op(in_word[8*i +: 8], in_t);

  for (genvar j = 0; j < N; j++) begin : g_arr
    logic signed [A_W-1:0] w [N];
    logic signed [SW-1:0]  sum;
    logic signed [9:0]     e;
    always_comb for (int i = 0; i < N; i++) w[i] = elem_op(w_tile[j][8*i +: 8], w_t);

    trigen_mac_1d #(.N(N)) u_mac (
      .ifm(ifm), .ifm_exp(in_word[263:256]), .w(w), .w_exp(w_tile[j][263:256]),
      .sum(sum), .exp_sum(e));

    trigen_acc #(.REGS(REGS), .SW(SW)) u_acc (
      .clk, .rst_n, .valid(in_valid), .clear(acc_clear), .idx(acc_idx),
      .sum(sum), .exp_sum(e), .rd_idx(rd_idx), .rd_data(rd_row[j]));
  end
endmodule

// trigen_acc: accumulator (ACC) of one MPA array.
//
// Holds REGS FI32 partial sums, one per IN0 row of the current command. When a
// dot product (SUM, EXP) arrives for register idx it is turned into FI32
// (value SUM * 2^(EXP-127)), brought to a common exponent with the stored
// partial sum, added and normalised, as the paper describes; with clear set
// the stored value is replaced instead (first depth block of a command).
// Timing: the update is written at the clock edge of the valid cycle; rd_data
// is a combinational read of register rd_idx. 64 registers follow the paper.
// Reset clears all registers to FI32 zero.
module trigen_acc
  import trigen_pkg::*;
#(
  parameter int REGS = ACC_REGS,
  parameter int SW   = SUM_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      valid,
  input  logic                      clear,
  input  logic [$clog2(REGS)-1:0]   idx,
  input  logic signed [SW-1:0]      sum,
  input  logic signed [9:0]         exp_sum,
  input  logic [$clog2(REGS)-1:0]   rd_idx,
  output fi32_t                     rd_data
);
  fi32_t acc_q [REGS];
  fi32_t nv;

  always_comb nv = fi32_norm(64'(sum), int'(exp_sum) + 22);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < REGS; i++) acc_q[i] <= '0;
    end else if (valid) begin
      acc_q[idx] <= clear ? nv : fi32_add(acc_q[idx], nv);
    end
  end

  assign rd_data = acc_q[rd_idx];
endmodule

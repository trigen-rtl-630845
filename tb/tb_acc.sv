// tb_acc: self-checking test of the ACC partial-sum registers.
// Random dot products with random exponents are accumulated into several
// registers (the first write of each of two rounds with clear, so the second
// round starts over non-zero contents); the stored FI32 values are compared
// with a real-valued running sum (relative 1e-5 or absolute 1e-6 of the
// largest term).
module tb_acc;
  import trigen_pkg::*;
  import tb_util_pkg::*;
  localparam int REGS = 64;
  logic clk = 0, rst_n = 0, valid = 0, clear = 0;
  logic [5:0] idx = '0, rd_idx = '0;
  logic signed [SUM_W-1:0] sum = '0;
  logic signed [9:0] exp_sum = '0;
  fi32_t rd_data;
  real refv [REGS], mag [REGS];
  int checks = 0, failures = 0;

  trigen_acc #(.REGS(REGS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real v;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // all registers read zero after reset
    for (int r = 0; r < REGS; r++) begin
      rd_idx = 6'(r); #1; checks++; if (rd_data != '0) failures++;
    end
    for (int pass = 0; pass < 6; pass++) begin
      for (int r = 0; r < REGS; r++) begin
        @(negedge clk);
        valid = 1; clear = (pass == 0 || pass == 3); idx = 6'(r);
        sum = SUM_W'($signed($urandom_range(0, 2000000)) - 1000000);
        exp_sum = 10'($urandom_range(120, 134));
        v = $itor(sum) * p2(int'(exp_sum) - 127);
        if (pass == 0 || pass == 3) begin refv[r] = v; mag[r] = (v < 0.0) ? -v : v; end
        else begin refv[r] += v; if (((v < 0.0) ? -v : v) > mag[r]) mag[r] = (v < 0.0) ? -v : v; end
      end
      @(negedge clk); valid = 0;
      for (int r = 0; r < REGS; r++) begin
        rd_idx = 6'(r); #1; checks++;
        if (!close(fi32_r(rd_data), refv[r], 1e-5, 1e-6 * mag[r])) begin
          failures++;
          if (failures < 5) $display("FAIL r=%0d got=%g want=%g", r, fi32_r(rd_data), refv[r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

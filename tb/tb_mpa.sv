// tb_mpa: self-checking test of the MAC processing array.
// Two depth blocks: for each, a random 32x32 IN1 tile (UINT8 or INT8 with its
// shared exponents) is held stationary and 64 random MX8 IN0 rows stream in,
// one per cycle. Every ACC value (64 rows x 32 columns) is compared with a
// real-valued dot product over both blocks. The stream of 64 rows takes 64
// cycles, one row per cycle.
module tb_mpa;
  import trigen_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 32, R = 64;
  logic clk = 0, rst_n = 0, in_valid = 0, acc_clear = 0;
  word_t in_word = '0;
  dtype_e in_t = DT_MX8, w_t = DT_UINT8;
  logic [5:0] acc_idx = '0, rd_idx = '0;
  word_t w_tile [N];
  fi32_t rd_row [N];
  real refm [R][N];
  int checks = 0, failures = 0;

  trigen_mpa dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real ev(input word_t w, input int i, input dtype_e t);
    int q;
    q = (t == DT_UINT8) ? int'(w[8*i +: 8]) : int'($signed(w[8*i +: 8]));
    return $itor(q) * p2(int'(w[263:256]) - 127);
  endfunction

  initial begin
    word_t rows [R];
    longint t0;
    for (int r = 0; r < R; r++) for (int j = 0; j < N; j++) refm[r][j] = 0.0;
    for (int j = 0; j < N; j++) w_tile[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 2; k++) begin
      w_t = (k == 0) ? DT_UINT8 : DT_INT8;
      for (int j = 0; j < N; j++) begin
        for (int b = 0; b < 8; b++) w_tile[j][32*b +: 32] = $urandom;
        if (k == 0) for (int i = 0; i < N; i++) w_tile[j][8*i +: 8] = 8'(w_tile[j][8*i +: 8] & 8'h0f); // UINT4 weights
        w_tile[j][263:256] = 8'($urandom_range(120, 127));
      end
      for (int r = 0; r < R; r++) begin
        for (int b = 0; b < 8; b++) rows[r][32*b +: 32] = $urandom;
        rows[r][263:256] = 8'($urandom_range(118, 130));
        for (int j = 0; j < N; j++)
          for (int i = 0; i < N; i++) refm[r][j] += ev(rows[r], i, DT_MX8) * ev(w_tile[j], i, w_t);
      end
      t0 = $time;
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        in_valid = 1; in_word = rows[r]; acc_idx = 6'(r); acc_clear = (k == 0);
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (($time - t0) / 10 != R + 1) failures++;   // R rows in R cycles (+1 to drop valid)
    end
    for (int r = 0; r < R; r++) begin
      rd_idx = 6'(r); #1;
      for (int j = 0; j < N; j++) begin
        checks++;
        if (!close(fi32_r(rd_row[j]), refm[r][j], 1e-5, 1e-3)) begin
          failures++;
          if (failures < 5) $display("FAIL r=%0d j=%0d got=%g want=%g", r, j, fi32_r(rd_row[j]), refm[r][j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

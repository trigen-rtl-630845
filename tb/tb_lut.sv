// tb_lut: self-checking test of the LUT unit.
// For each function the tables are computed here with real arithmetic, loaded
// through the load port, and 32 random inputs per cycle are compared with the
// exact function (relative error 2e-5; for SiLU the paper's decomposition
// with K = 2 is the reference, with an absolute floor of 5e-4). Also checks the
// special cases: zero and saturating inputs, masking of exp(very negative)
// to zero, and SiLU of large negative inputs.
module tb_lut;
  import trigen_pkg::*;
  import tb_util_pkg::*;

  localparam int L = 32;
  logic clk = 0, rst_n = 0;
  logic ld_we = 0, ld_exp_we = 0;
  logic [5:0] ld_widx = '0;
  logic [255:0] ld_word = '0;
  logic signed [7:0] ld_tbl_exp = '0;
  lut_flags_t func = '0;
  fi32_t x [L], y [L];
  int checks = 0, failures = 0;
  real worst;

  trigen_lut #(.LANES(L)) dut (.*);

  always #5 clk = ~clk;

  task automatic load(input tfunc_e f);
    word_t w [34];
    make_tables(f, w);
    for (int k = 0; k < 34; k++) begin
      @(negedge clk);
      ld_we = 1; ld_widx = 6'(k); ld_word = w[k][255:0];
      ld_exp_we = (k == 0); ld_tbl_exp = 8'(tbl_exp_of(f));
    end
    @(negedge clk);
    ld_we = 0; ld_exp_we = 0;
    func = flags_of(f);
  endtask

  function automatic real rnd_in(input tfunc_e f);
    real u;
    u = $urandom_range(0, 1000000) / 1000000.0;
    case (f)
      F_INV, F_ISQR, F_SQR: return $exp((u * 24.0 - 10.0) * 0.6931471805599453);   // 1/1024 .. 16384
      F_EXP:  return u * 24.0 - 20.0;                          // -20 .. 4
      default: return u * 72.0 - 8.0;                          // -8 .. 64
    endcase
  endfunction

  task automatic run(input tfunc_e f, input int iters);
    real xr [L];
    real got, want;
    worst = 0.0;
    load(f);
    for (int it = 0; it < iters; it++) begin
      for (int l = 0; l < L; l++) begin
        xr[l] = rnd_in(f);
        x[l] = r_fi32(xr[l]);
      end
      #1;
      for (int l = 0; l < L; l++) begin
        got  = fi32_r(y[l]);
        want = ref_f(f, fi32_r(x[l]));
        checks++;
        if (!close(got, want, 2e-5, (f == F_SILU) ? 5e-4 : 1e-30)) begin
          failures++;
          if (failures < 10) $display("FAIL f=%0d x=%g got=%g want=%g", f, fi32_r(x[l]), got, want);
        end
      end
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < L; l++) x[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(F_INV, 20);
    // reciprocal of a negative number and of zero
    x[0] = r_fi32(-4.0); x[1] = '0; #1;
    checks++; if (!close(fi32_r(y[0]), -0.25, 1e-5, 0.0)) failures++;
    checks++; if (y[1].exp != 8'd255) failures++;
    run(F_ISQR, 20);
    run(F_SQR, 20);
    run(F_EXP, 20);
    // masking: the minimum FI32 value gives exp() = 0
    x[0].exp = 8'd255; x[0].frac = 24'sh800000; #1;
    checks++; if (y[0] != '0) failures++;
    x[0] = '0; #1;
    checks++; if (!close(fi32_r(y[0]), 1.0, 1e-5, 0.0)) failures++;
    run(F_SILU, 20);
    x[0] = r_fi32(-100.0); x[1] = r_fi32(1000.0); #1;
    checks++; if (y[0] != '0) failures++;
    checks++; if (!close(fi32_r(y[1]), ref_f(F_SILU, 1000.0), 1e-5, 0.0)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ppa: self-checking test of the post-processing array.
// Rows of 32 random FI32 values go through the PPA in several configurations:
// bias add + CWQ rescale with FI32 output, the same with a fused exponential
// LUT and MX8 output (shared exponent and elements checked against a real
// model of the alignment), INT8/UINT8 output with a zero point, and the row
// sum. Output one cycle after in_valid is checked too.
module tb_ppa;
  import trigen_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0, in_valid = 0;
  fi32_t x [N], addv [N], mulv [N], y [N], red;
  logic add_en = 0, mul_en = 0, lut_en = 0;
  lut_flags_t func = '0;
  dtype_e out_t = DT_FI32;
  logic [7:0] zp = '0;
  logic ld_we = 0, ld_exp_we = 0;
  logic [5:0] ld_widx = '0;
  logic [255:0] ld_word = '0;
  logic signed [7:0] ld_tbl_exp = '0;
  logic out_valid;
  word_t out_word;
  int checks = 0, failures = 0;

  trigen_ppa dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", m); end
  endtask

  function automatic real rr(input real lo, input real hi);
    return lo + (hi - lo) * ($urandom_range(0, 1000000) / 1000000.0);
  endfunction

  task automatic one_row(input int mode);
    real xv [N], av [N], mv [N], ev [N], s, mx;
    int es, q, qr;
    for (int i = 0; i < N; i++) begin
      xv[i] = rr(-3.0, 3.0); av[i] = rr(-1.0, 1.0); mv[i] = rr(0.1, 2.0);
      x[i] = r_fi32(xv[i]); addv[i] = r_fi32(av[i]); mulv[i] = r_fi32(mv[i]);
      ev[i] = (fi32_r(x[i]) + fi32_r(addv[i])) * fi32_r(mulv[i]);
      if (mode == 1) ev[i] = $exp(ev[i]);
      if (mode >= 2) ev[i] = ev[i] * 20.0;   // integer outputs: spread the range
    end
    if (mode >= 2) for (int i = 0; i < N; i++) mulv[i] = r_fi32(fi32_r(mulv[i]) * 20.0);
    add_en = 1; mul_en = 1; lut_en = (mode == 1);
    func = flags_of(F_EXP);
    out_t = (mode == 0) ? DT_FI32 : (mode == 1) ? DT_MX8 : (mode == 2) ? DT_INT8 : DT_UINT8;
    zp = (mode == 3) ? 8'd128 : (mode == 2) ? 8'd3 : 8'd0;
    @(negedge clk); in_valid = 1;
    @(negedge clk); in_valid = 0;
    chk(out_valid, "out_valid one cycle after in_valid");
    s = 0.0; mx = 0.0;
    for (int i = 0; i < N; i++) begin
      s += ev[i];
      if ((ev[i] < 0 ? -ev[i] : ev[i]) > mx) mx = (ev[i] < 0 ? -ev[i] : ev[i]);
    end
    if (mode == 0) begin
      for (int i = 0; i < N; i++) chk(close(fi32_r(y[i]), ev[i], 1e-5, 1e-6), "fi32 lane");
      chk(close(fi32_r(red), s, 1e-5, 2e-4), "row sum");
    end else if (mode == 1) begin
      es = $rtoi($floor($ln(mx) / $ln(2.0))) - 6 + 127;
      chk(int'(out_word[263:256]) == es, $sformatf("mx shared exp %0d vs %0d", out_word[263:256], es));
      for (int i = 0; i < N; i++) begin
        qr = $rtoi($floor(ev[i] / p2(es - 127) + 0.5));
        if (qr > 127) qr = 127;
        q = int'($signed(out_word[8*i +: 8]));
        chk(q - qr <= 1 && qr - q <= 1, $sformatf("mx elem %0d vs %0d", q, qr));
      end
    end else begin
      for (int i = 0; i < N; i++) begin
        qr = $rtoi($floor(ev[i] + 0.5)) + int'(zp);
        if (mode == 2) begin
          if (qr > 127) qr = 127;
          if (qr < -128) qr = -128;
          q = int'($signed(out_word[8*i +: 8]));
        end else begin
          if (qr > 255) qr = 255;
          if (qr < 0) qr = 0;
          q = int'(out_word[8*i +: 8]);
        end
        chk(q - qr <= 1 && qr - q <= 1, $sformatf("int elem %0d vs %0d", q, qr));
      end
    end
  endtask

  initial begin
    word_t w [34];
    for (int i = 0; i < N; i++) begin x[i] = '0; addv[i] = '0; mulv[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    make_tables(F_EXP, w);
    for (int k = 0; k < 34; k++) begin
      @(negedge clk); ld_we = 1; ld_widx = 6'(k); ld_word = w[k][255:0]; ld_exp_we = (k == 0);
    end
    @(negedge clk); ld_we = 0; ld_exp_we = 0;
    for (int it = 0; it < 10; it++) for (int m = 0; m < 4; m++) one_row(m);
    // bypass of every stage: output equals input
    add_en = 0; mul_en = 0; lut_en = 0; out_t = DT_FI32;
    @(negedge clk); in_valid = 1; @(negedge clk); in_valid = 0;
    for (int i = 0; i < N; i++) chk(y[i] == x[i], "bypass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

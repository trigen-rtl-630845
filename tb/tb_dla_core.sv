// tb_dla_core: self-checking test of one DLA core against a memory model.
// The core runs, on random data: LUTLOAD (exp), TMATMUL with bias and CWQ
// (FI32 out), TMATMUL with PSUM masking and fused exp (MX8 out), MEAN_SQUARE,
// LUT (inverse square root), RESCALE (the RMSNorm sequence), MUL, ADD and
// MEAN. Results are compared with real-valued models computed here from the
// memory contents. The TMATMUL runs without memory stalls and checks that each
// IN0 stream takes one row per cycle; the other operations run with random
// grant stalls.
module tb_dla_core;
  import trigen_pkg::*;
  import tb_util_pkg::*;
  localparam int M = 40, KB = 2, NB = 2;
  localparam int A0 = 0, B0 = 128, BIAS = 300, CWQ = 320, PS = 400, TAB = 800, TAB2 = 840;
  localparam int O1 = 1000, O2 = 1400, OMS = 1500, OIS = 1600, ORS = 1700, OMU = 2000, OAD = 2400, OME = 2800;

  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, done, stall_en = 0;
  instr_t cmd = '0;
  logic m_req, m_we, m_gnt, m_rvalid;
  addr_t m_addr;
  word_t m_wdata, m_rdata;
  int checks = 0, failures = 0;
  int bursts = 0, bad_bursts = 0, blen = 0;

  trigen_dla_core dut (.*);
  tb_sram_model #(.WORDS(4096)) mem (.*);
  always #5 clk = ~clk;

  // length of each uninterrupted IN0 stream into the MPA
  always @(posedge clk) begin
    if (!rst_n) blen <= 0;
    else if (dut.mpa_valid) blen <= blen + 1;
    else if (blen != 0) begin
      bursts <= bursts + 1;
      if (blen != M) bad_bursts <= bad_bursts + 1;
      blen <= 0;
    end
  end

  initial begin
    #50000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  task automatic run(input instr_t c);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
  endtask

  function automatic real e8(input word_t w, input int i, input bit uns);
    int q;
    q = uns ? int'(w[8*i +: 8]) : int'($signed(w[8*i +: 8]));
    return $itor(q) * p2(int'(w[263:256]) - 127);
  endfunction

  function automatic real f32(input int base, input int idx);   // FI32 element idx of a packed tensor
    return fi32_r(mem.mem[base + idx / 8][32*(idx % 8) +: 32]);
  endfunction

  function automatic instr_t mk(input op_e op);
    instr_t c;
    c = '0; c.op = op; c.in0_t = DT_MX8; c.in1_t = DT_UINT8; c.out_t = DT_FI32;
    c.rows = 16'(M); c.kblk = 8'(KB); c.nblk = 8'(NB);
    return c;
  endfunction

  real ref_mm [M][32*NB];
  real a_v [M][32*KB];
  real ms [M];

  initial begin
    word_t tw [34];
    instr_t c;
    real v, s, sc, bias_v, cwq_v;
    int q, es;
    // ---- data
    for (int r = 0; r < M; r++) for (int k = 0; k < KB; k++) begin
      for (int b = 0; b < 8; b++) mem.mem[A0 + r*KB + k][32*b +: 32] = $urandom;
      mem.mem[A0 + r*KB + k][263:256] = 8'($urandom_range(118, 122));
      for (int i = 0; i < 32; i++) a_v[r][32*k + i] = e8(mem.mem[A0 + r*KB + k], i, 1'b0);
    end
    for (int n = 0; n < 32*NB; n++) for (int k = 0; k < KB; k++) begin
      for (int i = 0; i < 32; i++) mem.mem[B0 + n*KB + k][8*i +: 8] = 8'($urandom_range(0, 15));
      mem.mem[B0 + n*KB + k][263:256] = 8'd127;
    end
    for (int n = 0; n < 32*NB; n++) begin
      mem.mem[BIAS + n/8][32*(n%8) +: 32] = r_fi32(($urandom_range(0, 2000) - 1000) / 100.0);
      mem.mem[CWQ + n/8][32*(n%8) +: 32]  = r_fi32(($urandom_range(1, 1000)) / 20000.0);
    end
    for (int r = 0; r < M; r++) for (int n = 0; n < 32*NB; n++) begin
      fi32_t pv;
      pv = '0;
      if (n > r + 20) begin pv.exp = 8'd255; pv.frac = 24'sh800000; end   // masked
      mem.mem[PS + r*NB*4 + n/8][32*(n%8) +: 32] = pv;
    end
    make_tables(F_EXP, tw);  for (int k = 0; k < 34; k++) mem.mem[TAB + k]  = tw[k];
    make_tables(F_ISQR, tw); for (int k = 0; k < 34; k++) mem.mem[TAB2 + k] = tw[k];
    for (int r = 0; r < M; r++) for (int n = 0; n < 32*NB; n++) begin
      s = 0.0;
      for (int k = 0; k < 32*KB; k++) s += a_v[r][k] * e8(mem.mem[B0 + n*KB + k/32], k % 32, 1'b1);
      ref_mm[r][n] = s;
    end

    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- LUTLOAD exp
    c = mk(OP_LUTLOAD); c.in0 = addr_t'(TAB); c.tbl_exp = 8'(tbl_exp_of(F_EXP)); run(c);
    // ---- TMATMUL, bias + CWQ, FI32 out, no stalls
    c = mk(OP_TMATMUL); c.in0 = addr_t'(A0); c.in1 = addr_t'(B0); c.out = addr_t'(O1);
    c.bias_en = 1; c.cwq_en = 1; c.aux = addr_t'(BIAS); c.aux2 = addr_t'(CWQ);
    run(c);
    chk(bursts == NB*KB && bad_bursts == 0, $sformatf("IN0 streams %0d, broken %0d", bursts, bad_bursts));
    for (int r = 0; r < M; r++) for (int n = 0; n < 32*NB; n++) begin
      bias_v = f32(BIAS, n); cwq_v = f32(CWQ, n);
      v = (ref_mm[r][n] + bias_v) * cwq_v;
      chk(close(f32(O1 + r*NB*4, n), v, 1e-5, 1e-6), $sformatf("tmatmul r%0d n%0d %g %g", r, n, f32(O1 + r*NB*4, n), v));
    end
    stall_en = 1;
    // ---- TMATMUL, PSUM mask + fused exp, MX8 out
    c = mk(OP_TMATMUL); c.in0 = addr_t'(A0); c.in1 = addr_t'(B0); c.out = addr_t'(O2);
    c.psum_en = 1; c.psum = addr_t'(PS); c.cwq_en = 1; c.aux2 = addr_t'(CWQ);
    c.lut_en = 1; c.lut = flags_of(F_EXP); c.out_t = DT_MX8;
    run(c);
    for (int r = 0; r < M; r++) for (int nb = 0; nb < NB; nb++) begin
      es = int'(mem.mem[O2 + r*NB + nb][263:256]);
      sc = p2(es - 127);
      for (int i = 0; i < 32; i++) begin
        int n;
        n = 32*nb + i;
        q = int'($signed(mem.mem[O2 + r*NB + nb][8*i +: 8]));
        v = (n > r + 20) ? 0.0 : $exp(ref_mm[r][n] * f32(CWQ, n));
        chk(close($itor(q) * sc, v, 0.0, 1.01 * sc), $sformatf("mx r%0d n%0d q=%0d v=%g", r, n, q, v));
        if (n > r + 20) chk(q == 0, "masked element is zero");
      end
    end
    // ---- MEAN_SQUARE
    c = mk(OP_MEAN_SQUARE); c.in0 = addr_t'(A0); c.out = addr_t'(OMS); run(c);
    for (int r = 0; r < M; r++) begin
      s = 0.0;
      for (int k = 0; k < 32*KB; k++) s += a_v[r][k] * a_v[r][k];
      ms[r] = s;
      chk(close(f32(OMS, r), s, 1e-5, 0.0), $sformatf("mean_square r%0d", r));
    end
    // ---- LUTLOAD isqr, LUT on the square sums (2 rows of 32 FI32)
    c = mk(OP_LUTLOAD); c.in0 = addr_t'(TAB2); c.tbl_exp = 8'(tbl_exp_of(F_ISQR)); run(c);
    c = mk(OP_LUT); c.in0_t = DT_FI32; c.rows = 16'd2; c.kblk = 8'd1; c.in0 = addr_t'(OMS); c.out = addr_t'(OIS);
    c.lut = flags_of(F_ISQR); run(c);
    for (int r = 0; r < M; r++) chk(close(f32(OIS, r), 1.0 / $sqrt(ms[r]), 2e-5, 0.0), $sformatf("isqr r%0d", r));
    // ---- RESCALE the rows by their inverse RMS, MX8 out
    c = mk(OP_RESCALE); c.in0 = addr_t'(A0); c.aux = addr_t'(OIS); c.out = addr_t'(ORS); c.out_t = DT_MX8; run(c);
    for (int r = 0; r < M; r++) for (int k = 0; k < KB; k++) begin
      es = int'(mem.mem[ORS + r*KB + k][263:256]);
      sc = p2(es - 127);
      for (int i = 0; i < 32; i++) begin
        q = int'($signed(mem.mem[ORS + r*KB + k][8*i +: 8]));
        v = a_v[r][32*k + i] * f32(OIS, r);
        chk(close($itor(q) * sc, v, 0.0, 1.01 * sc), "rescale");
      end
    end
    // ---- MUL, ADD, MEAN on the FI32 TMATMUL result
    c = mk(OP_MUL); c.in0_t = DT_FI32; c.in1_t = DT_FI32; c.in0 = addr_t'(O1); c.in1 = addr_t'(O1);
    c.out = addr_t'(OMU); run(c);
    c.op = OP_ADD; c.out = addr_t'(OAD); run(c);
    c.op = OP_MEAN; c.out = addr_t'(OME); run(c);
    for (int r = 0; r < M; r++) begin
      s = 0.0;
      for (int n = 0; n < 32*NB; n++) begin
        v = f32(O1 + r*NB*4, n);
        s += v;
        chk(close(f32(OMU + r*NB*4, n), v * v, 1e-5, 1e-9), "mul");
        chk(close(f32(OAD + r*NB*4, n), 2.0 * v, 1e-5, 1e-9), "add");
      end
      chk(close(f32(OME, r), s, 1e-5, 1e-4), $sformatf("mean r%0d %g %g", r, f32(OME, r), s));
    end
    chk(mem.stalls > 0, "memory stalls were exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

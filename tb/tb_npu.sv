// tb_npu: end-to-end test of the NPU at its default size (4 DLA cores, 1 MiB
// of on-chip memory, one NPU).
// A program of NPU instructions, issued as the command processor would, moves
// a 256x64 MX8 activation X, a 64x64 4-bit weight W (one per byte), bias, CWQ,
// a causal-style PSUM mask and four LUT tables from a DRAM model into the
// on-chip memory, then computes
//   Y  = MX8(SiLU(X W^T + bias))                     TMATMUL with fused SiLU
//   S  = exp(CWQ * (X W^T) + mask)                   TMATMUL with PSUM and fused exp
//   P  = MX8(S / rowsum(S))                          MEAN, LUT (1/x), RESCALE
//   XN = MX8(X / sqrt(sum(X^2)))                     MEAN_SQUARE, LUT (1/sqrt), RESCALE
//   YT = transpose(Y), YC = column block 1 of Y      TMU transpose and strided copy
// writes everything back to DRAM, and ends with FENCE and SYNC. The DRAM
// contents are compared with real-valued models. Each mechanism of the design
// is counted (multi-core dispatch, bank-conflict stalls, TMU/DLA overlap, fused
// LUT, PSUM masking, MX8 output, LUT reload, transpose, strided copy, FENCE
// waits, SYNC, bus stalls) and one that never happened counts as a failure.
module tb_npu;
  import trigen_pkg::*;
  import tb_util_pkg::*;
  localparam int M = 256, KB = 2, NB = 2, NN = 32 * NB;
  // memory map (word addresses, the same in DRAM and on chip for the inputs)
  localparam int X0 = 0, W0 = 512, BIAS = 640, CWQ = 648;
  localparam int TSILU = 656, TEXP = 690, TINV = 724, TISQR = 758, PS = 800, IN_END = 2848;
  localparam int Y0 = 4096, S0 = 4608, RS = 6656, RI = 6688, P0 = 6720;
  localparam int MS = 7232, MI = 7264, XN = 7296, YT = 7808, YC = 8320, OUT_END = 8576;

  logic clk = 0, rst_n = 0, i_valid = 0, i_ready, busy;
  instr_t instr = '0;
  logic b_req, b_we, b_gnt, b_rvalid;
  logic [31:0] b_addr;
  word_t b_wdata, b_rdata;
  logic sync_out_valid;
  logic [7:0] sync_out_id;
  logic sync_in_valid [1];
  logic [7:0] sync_in_id [1];
  assign sync_in_valid[0] = 1'b0;
  assign sync_in_id[0] = '0;

  trigen_npu dut (.*);
  tb_dram_model #(.WORDS(16384)) dram (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  // mechanism counters
  int n_multi = 0, n_bank = 0, n_overlap = 0, n_fused = 0, n_masked = 0, n_mx = 0;
  int n_lutload = 0, n_transpose = 0, n_copy = 0, n_fence = 0, n_sync = 0, n_bus = 0;

  always @(posedge clk) begin
    int nb, st;
    cyc <= cyc + 1;
    if (rst_n) begin
    nb = 0; st = 0;
    for (int i = 0; i < 4; i++) begin
      if (!dut.dla_ready[i]) nb++;
      if (dut.dla_valid[i] && dut.dla_ready[i] && dut.dla_cmd[i].op == OP_TMATMUL && dut.dla_cmd[i].lut_en) n_fused++;
      if (dut.dla_valid[i] && dut.dla_ready[i] && dut.dla_cmd[i].op == OP_LUTLOAD) n_lutload++;
    end
    for (int i = 0; i < 6; i++) if (dut.m_req[i] && !dut.m_gnt[i]) st++;
    if (nb >= 2) n_multi++;
    if (st > 0) n_bank++;
    if (dut.u_ctrl.d_act && (dut.u_ctrl.tmu_busy || dut.u_ctrl.dma_busy)) n_overlap++;
    if (dut.tmu_valid && dut.tmu_cmd.op == OP_TMU_TRANSPOSE) n_transpose++;
    if (dut.tmu_valid && dut.tmu_cmd.op == OP_TMU_COPY) n_copy++;
    if (i_valid && !i_ready && instr.op == OP_FENCE) n_fence++;
    if (dut.sync_done) n_sync++;
    if (b_req && !b_gnt) n_bus++;
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  task automatic issue(input instr_t c);
    @(negedge clk);
    instr = c; i_valid = 1;
    @(posedge clk);
    while (!i_ready) @(posedge clk);
    @(negedge clk);
    i_valid = 0; instr = '0;
  endtask

  function automatic instr_t mk(input op_e op);
    instr_t c;
    c = '0; c.op = op; c.in0_t = DT_MX8; c.in1_t = DT_UINT8; c.out_t = DT_FI32;
    c.rows = 16'(M); c.kblk = 8'(KB); c.nblk = 8'(NB);
    return c;
  endfunction

  function automatic instr_t lutload(input int a, input tfunc_e f);
    instr_t c;
    c = mk(OP_LUTLOAD); c.in0 = addr_t'(a); c.tbl_exp = 8'(tbl_exp_of(f));
    return c;
  endfunction

  function automatic instr_t dma(input op_e op, input int sram, input int dram_a, input int n);
    instr_t c;
    c = '0; c.op = op; c.out = addr_t'(sram); c.dram_addr = 32'(dram_a); c.len = 16'(n);
    return c;
  endfunction

  function automatic real e8(input word_t w, input int i, input bit uns);
    int q;
    q = uns ? int'(w[8*i +: 8]) : int'($signed(w[8*i +: 8]));
    return $itor(q) * p2(int'(w[263:256]) - 127);
  endfunction

  function automatic real f32(input int base, input int idx);
    return fi32_r(dram.mem[base + idx / 8][32*(idx % 8) +: 32]);
  endfunction

  function automatic bit masked(input int r, input int n);
    return n > (r % 64) + 8;
  endfunction

  // MX8 block at DRAM word a against reals v: one LSB of the block scale, plus rel
  task automatic chk_mx(input int a, input real v [32], input real rel, input string m);
    real sc;
    int q;
    sc = p2(int'(dram.mem[a][263:256]) - 127);
    n_mx++;
    for (int i = 0; i < 32; i++) begin
      q = int'($signed(dram.mem[a][8*i +: 8]));
      chk(close($itor(q) * sc, v[i], rel, 1.01 * sc), $sformatf("%s word %0d lane %0d: %g vs %g", m, a, i, $itor(q) * sc, v[i]));
    end
  endtask

  real xv [M][32*KB];
  real dot [M][NN];

  initial begin
    word_t tw [34];
    instr_t c;
    real v [32];
    real s, t;
    longint t0;
    // ---- inputs in DRAM
    for (int i = 0; i < 16384; i++) dram.mem[i] = '0;
    for (int r = 0; r < M; r++) for (int k = 0; k < KB; k++) begin
      for (int b = 0; b < 8; b++) dram.mem[X0 + r*KB + k][32*b +: 32] = $urandom;
      dram.mem[X0 + r*KB + k][263:256] = 8'($urandom_range(118, 121));
      for (int i = 0; i < 32; i++) xv[r][32*k + i] = e8(dram.mem[X0 + r*KB + k], i, 1'b0);
    end
    for (int n = 0; n < NN; n++) for (int k = 0; k < KB; k++) begin
      for (int i = 0; i < 32; i++) dram.mem[W0 + n*KB + k][8*i +: 8] = 8'($urandom_range(0, 15));
      dram.mem[W0 + n*KB + k][263:256] = 8'd127;
    end
    for (int n = 0; n < NN; n++) begin
      dram.mem[BIAS + n/8][32*(n%8) +: 32] = r_fi32(($urandom_range(0, 2000) - 1000) / 100.0);
      dram.mem[CWQ + n/8][32*(n%8) +: 32]  = r_fi32($urandom_range(64, 128) / 8192.0);
    end
    for (int r = 0; r < M; r++) for (int n = 0; n < NN; n++) begin
      fi32_t pv;
      pv = '0;
      if (masked(r, n)) begin pv.exp = 8'd255; pv.frac = 24'sh800000; end
      dram.mem[PS + r*NB*4 + n/8][32*(n%8) +: 32] = pv;
    end
    make_tables(F_SILU, tw); for (int k = 0; k < 34; k++) dram.mem[TSILU + k] = tw[k];
    make_tables(F_EXP, tw);  for (int k = 0; k < 34; k++) dram.mem[TEXP + k]  = tw[k];
    make_tables(F_INV, tw);  for (int k = 0; k < 34; k++) dram.mem[TINV + k]  = tw[k];
    make_tables(F_ISQR, tw); for (int k = 0; k < 34; k++) dram.mem[TISQR + k] = tw[k];
    for (int r = 0; r < M; r++) for (int n = 0; n < NN; n++) begin
      s = 0.0;
      for (int k = 0; k < 32*KB; k++) s += xv[r][k] * e8(dram.mem[W0 + n*KB + k/32], k % 32, 1'b1);
      dot[r][n] = s;
    end

    repeat (10) @(negedge clk);
    rst_n = 1;
    t0 = cyc;
    // ---- program
    issue(dma(OP_DMA_RD, X0, X0, W0 + 128));               // X and W
    issue(dma(OP_DMA_RD, BIAS, BIAS, IN_END - BIAS));       // constants, tables, mask
    c = '0; c.op = OP_FENCE; issue(c);
    issue(lutload(TSILU, F_SILU));
    c = mk(OP_TMATMUL); c.in0 = addr_t'(X0); c.in1 = addr_t'(W0); c.out = addr_t'(Y0); c.out_t = DT_MX8;
    c.bias_en = 1; c.aux = addr_t'(BIAS); c.lut_en = 1; c.lut = flags_of(F_SILU); issue(c);
    c = '0; c.op = OP_FENCE; issue(c);
    c = '0; c.op = OP_TMU_TRANSPOSE; c.in0 = addr_t'(Y0); c.out = addr_t'(YT); c.rows = 16'(M); c.kblk = 8'(KB); issue(c);
    c = '0; c.op = OP_TMU_COPY; c.in0 = addr_t'(Y0 + 1); c.out = addr_t'(YC); c.rows = 16'(M); c.kblk = 8'd1;
    c.sstride = addr_t'(KB); c.dstride = addr_t'(1); issue(c);
    // softmax, running alongside the TMU
    issue(lutload(TEXP, F_EXP));
    c = mk(OP_TMATMUL); c.in0 = addr_t'(X0); c.in1 = addr_t'(W0); c.out = addr_t'(S0);
    c.cwq_en = 1; c.aux2 = addr_t'(CWQ); c.psum_en = 1; c.psum = addr_t'(PS);
    c.lut_en = 1; c.lut = flags_of(F_EXP); issue(c);
    c = mk(OP_MEAN); c.in0_t = DT_FI32; c.in0 = addr_t'(S0); c.out = addr_t'(RS); issue(c);
    issue(lutload(TINV, F_INV));
    c = mk(OP_LUT); c.in0_t = DT_FI32; c.rows = 16'(M / 32); c.kblk = 8'd1; c.in0 = addr_t'(RS); c.out = addr_t'(RI);
    c.lut = flags_of(F_INV); issue(c);
    c = mk(OP_RESCALE); c.in0_t = DT_FI32; c.in0 = addr_t'(S0); c.aux = addr_t'(RI); c.out = addr_t'(P0); c.out_t = DT_MX8; issue(c);
    // RMS normalisation
    c = mk(OP_MEAN_SQUARE); c.in0 = addr_t'(X0); c.out = addr_t'(MS); issue(c);
    issue(lutload(TISQR, F_ISQR));
    c = mk(OP_LUT); c.in0_t = DT_FI32; c.rows = 16'(M / 32); c.kblk = 8'd1; c.in0 = addr_t'(MS); c.out = addr_t'(MI);
    c.lut = flags_of(F_ISQR); issue(c);
    c = mk(OP_RESCALE); c.in0 = addr_t'(X0); c.aux = addr_t'(MI); c.out = addr_t'(XN); c.out_t = DT_MX8; issue(c);
    c = '0; c.op = OP_FENCE; issue(c);
    issue(dma(OP_DMA_WR, Y0, Y0, OUT_END - Y0));
    c = '0; c.op = OP_SYNC; c.sync_id = 8'd1; issue(c);
    @(negedge clk);
    while (busy) @(negedge clk);
    $display("program ran in %0d cycles", cyc - t0);

    // ---- results
    for (int r = 0; r < M; r++) for (int nb = 0; nb < NB; nb++) begin
      for (int i = 0; i < 32; i++) v[i] = ref_f(F_SILU, dot[r][32*nb + i] + f32(BIAS, 32*nb + i));
      chk_mx(Y0 + r*NB + nb, v, 1e-4, "Y");
    end
    for (int r = 0; r < M; r++) begin
      real sv [NN];
      s = 0.0;
      for (int n = 0; n < NN; n++) begin
        sv[n] = masked(r, n) ? 0.0 : $exp(dot[r][n] * f32(CWQ, n));
        s += sv[n];
        chk(close(f32(S0 + r*NB*4, n), sv[n], 2e-5, 1e-30), $sformatf("S r%0d n%0d", r, n));
        if (masked(r, n)) begin
          n_masked++;
          chk(dram.mem[S0 + r*NB*4 + n/8][32*(n%8) +: 32] == '0, "masked S is zero");
        end
      end
      chk(close(f32(RS, r), s, 2e-5, 0.0), $sformatf("rowsum r%0d", r));
      for (int nb = 0; nb < NB; nb++) begin
        for (int i = 0; i < 32; i++) v[i] = sv[32*nb + i] / s;
        chk_mx(P0 + r*NB + nb, v, 1e-4, "P");
      end
      s = 0.0;
      for (int k = 0; k < 32*KB; k++) s += xv[r][k] * xv[r][k];
      chk(close(f32(MS, r), s, 1e-5, 0.0), $sformatf("sumsq r%0d", r));
      t = 1.0 / $sqrt(s);
      for (int k = 0; k < KB; k++) begin
        for (int i = 0; i < 32; i++) v[i] = xv[r][32*k + i] * t;
        chk_mx(XN + r*KB + k, v, 1e-4, "XN");
      end
      chk(dram.mem[YC + r] == dram.mem[Y0 + r*KB + 1], "strided copy");
    end
    for (int n = 0; n < NN; n++) for (int ti = 0; ti < M / 32; ti++) begin
      word_t w;
      w = dram.mem[YT + n*(M/32) + ti];
      for (int i = 0; i < 32; i++)
        chk(w[8*i +: 8] == dram.mem[Y0 + (ti*32 + i)*KB + n/32][8*(n%32) +: 8], "transpose");
      chk(w[263:256] == dram.mem[Y0 + ti*32*KB + n/32][263:256], "transpose exponent");
    end
    // ---- mechanisms
    $display("multi-core %0d bank-stall %0d overlap %0d fused %0d masked %0d mx %0d lutload %0d",
             n_multi, n_bank, n_overlap, n_fused, n_masked, n_mx, n_lutload);
    $display("transpose %0d copy %0d fence-wait %0d sync %0d bus-stall %0d",
             n_transpose, n_copy, n_fence, n_sync, n_bus);
    chk(n_multi > 0, "several DLA cores ran at once");
    chk(n_bank > 0, "bank conflicts stalled a port");
    chk(n_overlap > 0, "TMU or DMA ran alongside DLA work");
    chk(n_fused == 8, "fused LUT commands");
    chk(n_masked > 0, "PSUM masking");
    chk(n_mx > 0, "MX8 output");
    chk(n_lutload == 16, "LUTLOAD reached every core for every table");
    chk(n_transpose == 1 && n_copy == 1, "TMU transpose and copy");
    chk(n_fence > 0, "FENCE held the program");
    chk(n_sync == 1, "SYNC completed");
    chk(n_bus > 0, "bus stalls");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

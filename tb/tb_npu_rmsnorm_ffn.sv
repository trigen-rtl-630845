// tb_npu_rmsnorm_ffn: workload test of the full-size NPU at the hidden size of
// Llama3.2-3B (3072). One RMSNorm tile of 96 tokens x 3072 MXINT8 values (the
// tile size that makes three tiles fill the 1 MiB buffer, as in the RMSNorm
// memory plan), followed by the gated part of an FFN for 64 output channels:
//   XN = MX8(X / sqrt(sum(X^2)))             MEAN_SQUARE, LUT (1/sqrt), RESCALE
//   G  = MX8(SiLU(CWQ * XN Wg^T))            TMATMUL, K = 3072, fused SiLU
//   U  = MX8(CWQ * XN Wu^T)                  TMATMUL, K = 3072
//   H  = MX8(G * U)                          MUL
// with 4-bit weights held one per byte. Inputs come from a DRAM model through
// the DMAC and the results go back to it; each stage is checked against a
// real-valued model fed with the previous stage's output as the NPU stored it,
// to one LSB of the MX8 block scale (plus 3e-4 for SiLU, the interpolation
// error of a 256-entry table over [-8, 8)).
module tb_npu_rmsnorm_ffn;
  import trigen_pkg::*;
  import tb_util_pkg::*;
  localparam int M = 96, KB = 96, NB = 2, NN = 32 * NB;
  localparam int X0 = 0, TISQR = 9216, TSILU = 9250, WG = 9300, WU = 15444, CWQ = 21600, IN_END = 21608;
  localparam int SQ = 22000, IS = 22016, XN = 22100, G0 = 31400, U0 = 31600, H0 = 31800, OUT_END = 31992;

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
  tb_dram_model #(.WORDS(32768)) dram (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

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
    c = '0; c.op = op; c.in0_t = DT_MX8; c.in1_t = DT_UINT8; c.out_t = DT_MX8;
    c.rows = 16'(M); c.kblk = 8'(KB); c.nblk = 8'(NB);
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

  task automatic chk_mx(input int a, input real v [32], input real abs_t, input string m);
    real sc;
    int q;
    sc = p2(int'(dram.mem[a][263:256]) - 127);
    for (int i = 0; i < 32; i++) begin
      q = int'($signed(dram.mem[a][8*i +: 8]));
      chk(close($itor(q) * sc, v[i], 1e-4, 1.01 * sc + abs_t), $sformatf("%s word %0d lane %0d: %g vs %g", m, a, i, $itor(q) * sc, v[i]));
    end
  endtask

  initial begin
    word_t tw [34];
    instr_t c;
    real v [32];
    real s, t, sg, su;
    longint t0, t1;
    for (int i = 0; i < 32768; i++) dram.mem[i] = '0;
    for (int w = 0; w < M * KB; w++) begin
      for (int b = 0; b < 8; b++) dram.mem[X0 + w][32*b +: 32] = $urandom;
      dram.mem[X0 + w][263:256] = 8'($urandom_range(118, 121));
    end
    for (int w = 0; w < NN * KB; w++) begin
      for (int i = 0; i < 32; i++) begin
        dram.mem[WG + w][8*i +: 8] = 8'($urandom_range(0, 15));
        dram.mem[WU + w][8*i +: 8] = 8'($urandom_range(0, 15));
      end
      dram.mem[WG + w][263:256] = 8'd127;
      dram.mem[WU + w][263:256] = 8'd127;
    end
    for (int n = 0; n < NN; n++) dram.mem[CWQ + n/8][32*(n%8) +: 32] = r_fi32($urandom_range(64, 128) / 1024.0);
    make_tables(F_ISQR, tw); for (int k = 0; k < 34; k++) dram.mem[TISQR + k] = tw[k];
    make_tables(F_SILU, tw); for (int k = 0; k < 34; k++) dram.mem[TSILU + k] = tw[k];

    repeat (10) @(negedge clk);
    rst_n = 1;
    t0 = cyc;
    c = '0; c.op = OP_DMA_RD; c.out = addr_t'(X0); c.dram_addr = 32'(X0); c.len = 16'(IN_END); issue(c);
    c = '0; c.op = OP_FENCE; issue(c);
    t1 = cyc;
    c = mk(OP_MEAN_SQUARE); c.out = addr_t'(SQ); issue(c);
    c = mk(OP_LUTLOAD); c.in0 = addr_t'(TISQR); c.tbl_exp = 8'(tbl_exp_of(F_ISQR)); issue(c);
    c = mk(OP_LUT); c.in0_t = DT_FI32; c.out_t = DT_FI32; c.rows = 16'(M / 32); c.kblk = 8'd1;
    c.in0 = addr_t'(SQ); c.out = addr_t'(IS); c.lut = flags_of(F_ISQR); issue(c);
    c = mk(OP_RESCALE); c.in0 = addr_t'(X0); c.aux = addr_t'(IS); c.out = addr_t'(XN); issue(c);
    c = mk(OP_LUTLOAD); c.in0 = addr_t'(TSILU); c.tbl_exp = 8'(tbl_exp_of(F_SILU)); issue(c);
    c = mk(OP_TMATMUL); c.in0 = addr_t'(XN); c.in1 = addr_t'(WG); c.out = addr_t'(G0);
    c.cwq_en = 1; c.aux2 = addr_t'(CWQ); c.lut_en = 1; c.lut = flags_of(F_SILU); issue(c);
    c = mk(OP_TMATMUL); c.in0 = addr_t'(XN); c.in1 = addr_t'(WU); c.out = addr_t'(U0);
    c.cwq_en = 1; c.aux2 = addr_t'(CWQ); issue(c);
    c = mk(OP_MUL); c.in1_t = DT_MX8; c.kblk = 8'(NB); c.in0 = addr_t'(G0); c.in1 = addr_t'(U0); c.out = addr_t'(H0); issue(c);
    c = '0; c.op = OP_FENCE; issue(c);
    $display("compute took %0d cycles", cyc - t1);
    c = '0; c.op = OP_DMA_WR; c.out = addr_t'(SQ); c.dram_addr = 32'(SQ); c.len = 16'(OUT_END - SQ); issue(c);
    c = '0; c.op = OP_FENCE; issue(c);
    $display("program ran in %0d cycles", cyc - t0);

    for (int r = 0; r < M; r++) begin
      s = 0.0;
      for (int k = 0; k < KB; k++) for (int i = 0; i < 32; i++) begin
        t = e8(dram.mem[X0 + r*KB + k], i, 1'b0);
        s += t * t;
      end
      chk(close(f32(SQ, r), s, 1e-5, 0.0), $sformatf("sum of squares r%0d", r));
      chk(close(f32(IS, r), 1.0 / $sqrt(s), 3e-5, 0.0), $sformatf("1/sqrt r%0d", r));
      for (int k = 0; k < KB; k++) begin
        for (int i = 0; i < 32; i++) v[i] = e8(dram.mem[X0 + r*KB + k], i, 1'b0) * f32(IS, r);
        chk_mx(XN + r*KB + k, v, 0.0, "XN");
      end
    end
    for (int r = 0; r < M; r++) for (int nb = 0; nb < NB; nb++) begin
      real vg [32], vu [32], vh [32];
      for (int i = 0; i < 32; i++) begin
        int n;
        n = 32*nb + i;
        sg = 0.0; su = 0.0;
        for (int k = 0; k < KB; k++) for (int j = 0; j < 32; j++) begin
          t = e8(dram.mem[XN + r*KB + k], j, 1'b0);
          sg += t * e8(dram.mem[WG + n*KB + k], j, 1'b1);
          su += t * e8(dram.mem[WU + n*KB + k], j, 1'b1);
        end
        vg[i] = ref_f(F_SILU, sg * f32(CWQ, n));
        vu[i] = su * f32(CWQ, n);
        vh[i] = e8(dram.mem[G0 + r*NB + nb], i, 1'b0) * e8(dram.mem[U0 + r*NB + nb], i, 1'b0);
      end
      chk_mx(G0 + r*NB + nb, vg, 3e-4, "G");   // SiLU table: interpolation error up to 2.4e-4
      chk_mx(U0 + r*NB + nb, vu, 0.0, "U");
      chk_mx(H0 + r*NB + nb, vh, 0.0, "H");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

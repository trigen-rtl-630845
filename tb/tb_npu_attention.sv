// tb_npu_attention: workload test of the full-size NPU on one attention head
// with a causal mask: 128 tokens, head dimension 128, MXINT8 activations on
// both sides of every product.
//   S = exp(CWQ * Q K^T + mask)       TMATMUL, PSUM = 0 or the minimum FI32 value,
//                                     fused exp (CWQ holds 1/sqrt(128))
//   P = MX8(S / rowsum(S))            MEAN, LUT (1/x), RESCALE
//   O = P (V^T)^T                     TMATMUL with V^T stored as the IN1 operand
// V^T is produced directly (as a projection writes it), so no transpose is
// needed for P V. Inputs come from a DRAM model through the DMAC and the
// results go back to it. Each stage is checked against a real-valued model
// fed with the previous stage's stored output; masked scores must be exactly 0.
module tb_npu_attention;
  import trigen_pkg::*;
  import tb_util_pkg::*;
  localparam int T = 128, D = 128, DB = D / 32, TB = T / 32;
  localparam int Q0 = 0, K0 = 512, VT = 1024, CWQ = 1536, CWQ1 = 1552, TEXP = 1568, TINV = 1602, PS = 1640;
  localparam int IN_END = PS + T * TB * 4;                      // 3688
  localparam int S0 = 4096, RS = S0 + T * TB * 4, RI = RS + T / 8, P0 = RI + T / 8, O0 = P0 + T * TB;
  localparam int OUT_END = O0 + T * DB * 4;

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

  int checks = 0, failures = 0, n_masked = 0;
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

  function automatic real e8(input word_t w, input int i);
    int q;
    q = int'($signed(w[8*i +: 8]));
    return $itor(q) * p2(int'(w[263:256]) - 127);
  endfunction

  function automatic real f32(input int base, input int idx);
    return fi32_r(dram.mem[base + idx / 8][32*(idx % 8) +: 32]);
  endfunction

  initial begin
    word_t tw [34];
    instr_t c;
    real s, t, sc;
    real sv [T];
    int q;
    for (int i = 0; i < 16384; i++) dram.mem[i] = '0;
    for (int w = 0; w < 3 * T * DB; w++) begin      // Q, K, V^T
      for (int b = 0; b < 8; b++) dram.mem[Q0 + w][32*b +: 32] = $urandom;
      dram.mem[Q0 + w][263:256] = 8'($urandom_range(118, 121));
    end
    for (int n = 0; n < T; n++) dram.mem[CWQ + n/8][32*(n%8) +: 32] = r_fi32(1.0 / $sqrt(128.0));
    for (int n = 0; n < D; n++) dram.mem[CWQ1 + n/8][32*(n%8) +: 32] = r_fi32(1.0);
    for (int r = 0; r < T; r++) for (int n = 0; n < T; n++) begin
      fi32_t pv;
      pv = '0;
      if (n > r) begin pv.exp = 8'd255; pv.frac = 24'sh800000; end
      dram.mem[PS + r*TB*4 + n/8][32*(n%8) +: 32] = pv;
    end
    make_tables(F_EXP, tw); for (int k = 0; k < 34; k++) dram.mem[TEXP + k] = tw[k];
    make_tables(F_INV, tw); for (int k = 0; k < 34; k++) dram.mem[TINV + k] = tw[k];

    repeat (10) @(negedge clk);
    rst_n = 1;
    c = '0; c.op = OP_DMA_RD; c.out = addr_t'(Q0); c.dram_addr = 32'(Q0); c.len = 16'(IN_END); issue(c);
    c = '0; c.op = OP_FENCE; issue(c);
    c = '0; c.op = OP_LUTLOAD; c.in0 = addr_t'(TEXP); c.tbl_exp = 8'(tbl_exp_of(F_EXP)); issue(c);
    c = '0; c.op = OP_TMATMUL; c.in0_t = DT_MX8; c.in1_t = DT_MX8; c.out_t = DT_FI32;
    c.rows = 16'(T); c.kblk = 8'(DB); c.nblk = 8'(TB); c.in0 = addr_t'(Q0); c.in1 = addr_t'(K0); c.out = addr_t'(S0);
    c.cwq_en = 1; c.aux2 = addr_t'(CWQ); c.psum_en = 1; c.psum = addr_t'(PS); c.lut_en = 1; c.lut = flags_of(F_EXP); issue(c);
    c = '0; c.op = OP_MEAN; c.in0_t = DT_FI32; c.rows = 16'(T); c.kblk = 8'(TB); c.in0 = addr_t'(S0); c.out = addr_t'(RS); issue(c);
    c = '0; c.op = OP_LUTLOAD; c.in0 = addr_t'(TINV); c.tbl_exp = 8'(tbl_exp_of(F_INV)); issue(c);
    c = '0; c.op = OP_LUT; c.in0_t = DT_FI32; c.out_t = DT_FI32; c.rows = 16'(T / 32); c.kblk = 8'd1;
    c.in0 = addr_t'(RS); c.out = addr_t'(RI); c.lut = flags_of(F_INV); issue(c);
    c = '0; c.op = OP_RESCALE; c.in0_t = DT_FI32; c.out_t = DT_MX8; c.rows = 16'(T); c.kblk = 8'(TB);
    c.in0 = addr_t'(S0); c.aux = addr_t'(RI); c.out = addr_t'(P0); issue(c);
    c = '0; c.op = OP_TMATMUL; c.in0_t = DT_MX8; c.in1_t = DT_MX8; c.out_t = DT_FI32;
    c.rows = 16'(T); c.kblk = 8'(TB); c.nblk = 8'(DB); c.in0 = addr_t'(P0); c.in1 = addr_t'(VT); c.out = addr_t'(O0); issue(c);
    c = '0; c.op = OP_FENCE; issue(c);
    c = '0; c.op = OP_DMA_WR; c.out = addr_t'(S0); c.dram_addr = 32'(S0); c.len = 16'(OUT_END - S0); issue(c);
    c = '0; c.op = OP_FENCE; issue(c);
    $display("program ran in %0d cycles", cyc);

    for (int r = 0; r < T; r++) begin
      s = 0.0;
      for (int n = 0; n < T; n++) begin
        t = 0.0;
        for (int k = 0; k < D; k++) t += e8(dram.mem[Q0 + r*DB + k/32], k % 32) * e8(dram.mem[K0 + n*DB + k/32], k % 32);
        sv[n] = (n > r) ? 0.0 : $exp(t * f32(CWQ, n));
        s += sv[n];
        chk(close(f32(S0 + r*TB*4, n), sv[n], 3e-5, 1e-30), $sformatf("S r%0d n%0d %g %g", r, n, f32(S0 + r*TB*4, n), sv[n]));
        if (n > r) begin
          n_masked++;
          chk(dram.mem[S0 + r*TB*4 + n/8][32*(n%8) +: 32] == '0, "masked score is zero");
        end
      end
      chk(close(f32(RS, r), s, 3e-5, 0.0), "row sum");
      for (int n = 0; n < T; n++) begin
        sc = p2(int'(dram.mem[P0 + r*TB + n/32][263:256]) - 127);
        q = int'($signed(dram.mem[P0 + r*TB + n/32][8*(n%32) +: 8]));
        chk(close($itor(q) * sc, sv[n] / s, 1e-4, 1.01 * sc), $sformatf("P r%0d n%0d", r, n));
      end
      for (int d = 0; d < D; d++) begin
        t = 0.0;
        for (int n = 0; n < T; n++) t += e8(dram.mem[P0 + r*TB + n/32], n % 32) * e8(dram.mem[VT + d*TB + n/32], n % 32);
        chk(close(f32(O0 + r*DB*4, d), t, 1e-5, 1e-6), $sformatf("O r%0d d%0d %g %g", r, d, f32(O0 + r*DB*4, d), t));
      end
    end
    chk(n_masked == T * (T - 1) / 2, "causal mask covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_tmu: self-checking test of the tensor manipulation unit against an
// on-chip memory model with random grant stalls. A 64 x 96 byte matrix is
// transposed (each written byte and exponent is checked against the source),
// and a strided copy moves a 10 x 4 word slice between tensors of different row
// strides (every destination word is checked, and the gaps between destination
// rows are checked untouched).
module tb_tmu;
  import trigen_pkg::*;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, done, stall_en = 1;
  instr_t cmd = '0;
  logic m_req, m_we, m_gnt, m_rvalid;
  addr_t m_addr;
  word_t m_wdata, m_rdata;
  int checks = 0, failures = 0;
  localparam int R = 64, KB = 3, SRC = 0, DST = 500, CS = 1000, CD = 1500;

  trigen_tmu dut (.*);
  tb_sram_model #(.WORDS(4096)) mem (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
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

  initial begin
    instr_t c;
    word_t guard;
    for (int i = 0; i < 4096; i++) for (int j = 0; j < 9; j++) mem.mem[i][32*j +: 32] = $urandom;
    guard = mem.mem[CD + 4];
    repeat (2) @(negedge clk);
    rst_n = 1;
    c = '0; c.op = OP_TMU_TRANSPOSE; c.in0 = addr_t'(SRC); c.out = addr_t'(DST); c.rows = 16'(R); c.kblk = 8'(KB);
    run(c);
    for (int n = 0; n < 32 * KB; n++) for (int ti = 0; ti < R / 32; ti++) begin
      word_t w;
      w = mem.mem[DST + n * (R / 32) + ti];
      for (int i = 0; i < 32; i++)
        chk(w[8*i +: 8] == mem.mem[SRC + (ti*32 + i)*KB + n/32][8*(n%32) +: 8], $sformatf("transpose n%0d ti%0d i%0d", n, ti, i));
      chk(w[263:256] == mem.mem[SRC + ti*32*KB + n/32][263:256], "transpose exponent");
    end
    c = '0; c.op = OP_TMU_COPY; c.in0 = addr_t'(CS); c.out = addr_t'(CD); c.rows = 16'd10; c.kblk = 8'd4;
    c.sstride = addr_t'(7); c.dstride = addr_t'(5);
    run(c);
    for (int r = 0; r < 10; r++) for (int k = 0; k < 4; k++)
      chk(mem.mem[CD + r*5 + k] == mem.mem[CS + r*7 + k], $sformatf("copy r%0d k%0d", r, k));
    chk(mem.mem[CD + 4] == guard, "copy leaves the row gap alone");
    chk(mem.stalls > 0, "stalls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

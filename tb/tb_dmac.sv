// tb_dmac: self-checking test of the DMA controller between a DRAM model
// (random bus grants, 6-cycle read latency) and an on-chip memory model
// (random grant stalls). Three transfers are run: DRAM to SRAM, SRAM to DRAM
// and a zero-length one; the destination contents are compared word by word
// with the source, the words next to the destination are checked untouched,
// and a DRAM-to-SRAM transfer without SRAM stalls is checked to sustain more
// than one word per two cycles despite the bus latency (reads kept in flight).
module tb_dmac;
  import trigen_pkg::*;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, done, stall_en = 1;
  instr_t cmd = '0;
  logic m_req, m_we, m_gnt, m_rvalid;
  addr_t m_addr;
  word_t m_wdata, m_rdata;
  logic b_req, b_we, b_gnt, b_rvalid;
  logic [31:0] b_addr;
  word_t b_wdata, b_rdata;
  int checks = 0, failures = 0;

  trigen_dmac #(.DEPTH(8)) dut (.*);
  tb_sram_model #(.WORDS(4096)) sram (.*);
  tb_dram_model #(.WORDS(4096), .LAT(6)) dram (.*);
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

  task automatic run(input op_e op, input int s, input int d, input int n, output int cycles);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = '0; cmd.op = op; cmd.out = addr_t'(s); cmd.dram_addr = 32'(d); cmd.len = 16'(n);
    cmd_valid = 1;
    cycles = 0;
    @(negedge clk); cmd_valid = 0;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  function automatic word_t rnd_word();
    word_t w;
    for (int i = 0; i < 9; i++) w[32*i +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    int cy;
    for (int i = 0; i < 4096; i++) begin sram.mem[i] = rnd_word(); dram.mem[i] = rnd_word(); end
    repeat (10) @(negedge clk);
    rst_n = 1;
    run(OP_DMA_RD, 50, 100, 200, cy);
    for (int i = 0; i < 200; i++) chk(sram.mem[50 + i] == dram.mem[100 + i], $sformatf("rd word %0d", i));
    chk(sram.mem[49] != dram.mem[99] && sram.mem[250] != dram.mem[300], "rd bounds");
    run(OP_DMA_WR, 300, 1000, 150, cy);
    for (int i = 0; i < 150; i++) chk(dram.mem[1000 + i] == sram.mem[300 + i], $sformatf("wr word %0d", i));
    chk(dram.mem[1150] != sram.mem[450], "wr bounds");
    run(OP_DMA_RD, 700, 2000, 0, cy);
    chk(cy < 4, "zero-length transfer");
    stall_en = 0;
    run(OP_DMA_RD, 1000, 3000, 256, cy);
    for (int i = 0; i < 256; i++) chk(sram.mem[1000 + i] == dram.mem[3000 + i], "rd2");
    $display("256 words in %0d cycles", cy);
    chk(cy < 2 * 256, "reads kept in flight");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

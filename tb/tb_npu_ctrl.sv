// tb_npu_ctrl: self-checking test of the NPU instruction dispatcher with
// behavioural stand-ins for the four DLA cores, the TMU, the DMAC and the sync
// unit (each busy for a random number of cycles per command). It checks the
// split of DLA instructions into 64-row commands and each command's row count
// and address offsets (TMATMUL, ADD, MEAN, RESCALE), that the first commands
// of an instruction reach idle cores one per cycle, that LUTLOAD reaches every
// core once, that a DMA instruction is accepted while DLA work runs, and that
// FENCE and SYNC hold the program until everything is idle / synchronised.
module tb_npu_ctrl;
  import trigen_pkg::*;
  localparam int ND = 4;
  logic clk = 0, rst_n = 0, i_valid = 0, i_ready, busy;
  instr_t instr = '0;
  logic dla_valid [ND], dla_ready [ND], dla_done [ND];
  instr_t dla_cmd [ND];
  logic tmu_valid, tmu_ready, tmu_done, dma_valid, dma_ready, dma_done;
  instr_t tmu_cmd, dma_cmd;
  logic sync_start, sync_done;
  logic [7:0] sync_id;
  int checks = 0, failures = 0;
  longint cyc = 0;

  trigen_npu_ctrl #(.ND(ND)) dut (.*);
  always #5 clk = ~clk;

  // received commands, in order
  instr_t got [$];
  longint got_t [$];
  int     got_core [$];
  int dla_cnt [ND], tmu_cnt, dma_cnt, sync_cnt, sync_wait;
  int n_dma_overlap = 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ND; i++) begin dla_cnt[i] <= 0; dla_ready[i] <= 1; dla_done[i] <= 0; end
      tmu_cnt <= 0; dma_cnt <= 0; sync_cnt <= 0; sync_wait <= 0;
      tmu_ready <= 1; tmu_done <= 0; dma_ready <= 1; dma_done <= 0; sync_done <= 0;
    end else begin
      cyc <= cyc + 1;
      for (int i = 0; i < ND; i++) begin
        dla_done[i] <= 1'b0;
        if (dla_valid[i]) begin
          got.push_back(dla_cmd[i]); got_t.push_back(cyc); got_core.push_back(i);
          dla_ready[i] <= 1'b0; dla_cnt[i] <= $urandom_range(3, 20);
        end else if (!dla_ready[i]) begin
          if (dla_cnt[i] == 0) begin dla_ready[i] <= 1'b1; dla_done[i] <= 1'b1; end
          else dla_cnt[i] <= dla_cnt[i] - 1;
        end
      end
      tmu_done <= 1'b0; dma_done <= 1'b0; sync_done <= 1'b0;
      if (tmu_valid) begin tmu_ready <= 1'b0; tmu_cnt <= $urandom_range(3, 20); end
      else if (!tmu_ready) begin
        if (tmu_cnt == 0) begin tmu_ready <= 1'b1; tmu_done <= 1'b1; end else tmu_cnt <= tmu_cnt - 1;
      end
      if (dma_valid) begin
        dma_ready <= 1'b0; dma_cnt <= $urandom_range(30, 60);
        if (dut.d_act) n_dma_overlap <= n_dma_overlap + 1;
      end else if (!dma_ready) begin
        if (dma_cnt == 0) begin dma_ready <= 1'b1; dma_done <= 1'b1; end else dma_cnt <= dma_cnt - 1;
      end
      if (sync_start) sync_cnt <= 10;
      else if (sync_cnt == 1) begin sync_done <= 1'b1; sync_cnt <= 0; end
      else if (sync_cnt > 1) sync_cnt <= sync_cnt - 1;
    end
  end

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

  task automatic issue(input instr_t c, output longint waited);
    @(negedge clk);
    instr = c; i_valid = 1;
    waited = 0;
    @(posedge clk);
    while (!i_ready) begin @(posedge clk); waited++; end
    @(negedge clk);
    i_valid = 0; instr = '0;
  endtask

  task automatic drain();
    @(negedge clk);
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  // check the commands received for one instruction
  task automatic check_split(input instr_t c, input int nw_in, input int nw_out, input string m);
    int n, r0;
    n = (int'(c.rows) + 63) / 64;
    chk(got.size() == n, $sformatf("%s: %0d commands, expected %0d", m, got.size(), n));
    for (int j = 0; j < got.size() && j < n; j++) begin
      r0 = 64 * j;
      chk(int'(got[j].rows) == ((int'(c.rows) - r0 > 64) ? 64 : int'(c.rows) - r0), $sformatf("%s rows of command %0d", m, j));
      chk(int'(got[j].in0) == int'(c.in0) + r0 * int'(c.kblk) * nw_in, $sformatf("%s in0 of command %0d", m, j));
      case (c.op)
        OP_TMATMUL: begin
          chk(int'(got[j].out) == int'(c.out) + r0 * int'(c.nblk) * nw_out, $sformatf("%s out %0d", m, j));
          chk(int'(got[j].psum) == int'(c.psum) + r0 * int'(c.nblk) * 4, $sformatf("%s psum %0d", m, j));
          chk(got[j].in1 == c.in1 && got[j].aux == c.aux, $sformatf("%s weights/bias unchanged", m));
        end
        OP_MEAN: chk(int'(got[j].out) == int'(c.out) + r0 / 8, $sformatf("%s out %0d", m, j));
        default: begin
          chk(int'(got[j].out) == int'(c.out) + r0 * int'(c.kblk) * nw_out, $sformatf("%s out %0d", m, j));
          if (c.op == OP_RESCALE) chk(int'(got[j].aux) == int'(c.aux) + r0 / 8, $sformatf("%s aux %0d", m, j));
          else chk(int'(got[j].in1) == int'(c.in1) + r0 * int'(c.kblk) * nw_in, $sformatf("%s in1 %0d", m, j));
        end
      endcase
    end
    got.delete(); got_t.delete(); got_core.delete();
  endtask

  initial begin
    instr_t c;
    longint w;
    int seen [ND];
    repeat (2) @(negedge clk);
    rst_n = 1;
    // TMATMUL, 200 rows -> 64, 64, 64, 8
    c = '0; c.op = OP_TMATMUL; c.rows = 16'd200; c.kblk = 8'd3; c.nblk = 8'd2; c.in0_t = DT_MX8; c.out_t = DT_FI32;
    c.in0 = 15'd100; c.in1 = 15'd3000; c.out = 15'd1000; c.psum = 15'd5000; c.aux = 15'd7000;
    issue(c, w);
    // DMA accepted while the cores work
    c = '0; c.op = OP_DMA_RD; c.len = 16'd10; issue(c, w);
    chk(w == 0, "DMA accepted during DLA work");
    repeat (3) @(negedge clk);
    chk(got.size() == 4, "four commands issued");
    if (got.size() == 4) begin
      chk(got_t[1] == got_t[0] + 1 && got_t[2] == got_t[1] + 1 && got_t[3] == got_t[2] + 1, "one command per cycle to idle cores");
      chk(got_core[0] != got_core[1] && got_core[1] != got_core[2] && got_core[2] != got_core[3], "distinct cores");
    end
    c = '0; c.op = OP_FENCE; issue(c, w);
    chk(w > 0 && !busy, "FENCE waited for idle");
    c = '0; c.op = OP_TMATMUL; c.rows = 16'd200; c.kblk = 8'd3; c.nblk = 8'd2; c.in0_t = DT_MX8; c.out_t = DT_FI32;
    c.in0 = 15'd100; c.in1 = 15'd3000; c.out = 15'd1000; c.psum = 15'd5000; c.aux = 15'd7000;
    check_split(c, 1, 4, "tmatmul");
    // LUTLOAD to every core
    c = '0; c.op = OP_LUTLOAD; c.in0 = 15'd900; issue(c, w); drain();
    chk(got.size() == ND, "LUTLOAD commands");
    for (int i = 0; i < ND; i++) seen[i] = 0;
    for (int j = 0; j < got.size(); j++) begin seen[got_core[j]]++; chk(got[j].in0 == 15'd900, "LUTLOAD address"); end
    for (int i = 0; i < ND; i++) chk(seen[i] == 1, "each core loaded once");
    got.delete(); got_t.delete(); got_core.delete();
    // ADD, FI32 in, MX8 out, 70 rows
    c = '0; c.op = OP_ADD; c.rows = 16'd70; c.kblk = 8'd2; c.in0_t = DT_FI32; c.in1_t = DT_FI32; c.out_t = DT_MX8;
    c.in0 = 15'd10; c.in1 = 15'd2000; c.out = 15'd4000;
    issue(c, w); drain(); check_split(c, 4, 1, "add");
    // MEAN, 300 rows
    c = '0; c.op = OP_MEAN; c.rows = 16'd300; c.kblk = 8'd1; c.in0_t = DT_FI32; c.in0 = 15'd0; c.out = 15'd9000;
    issue(c, w); drain(); check_split(c, 4, 1, "mean");
    // RESCALE, MX8 in, 130 rows
    c = '0; c.op = OP_RESCALE; c.rows = 16'd130; c.kblk = 8'd2; c.in0_t = DT_MX8; c.out_t = DT_MX8;
    c.in0 = 15'd0; c.aux = 15'd8000; c.out = 15'd600;
    issue(c, w); drain(); check_split(c, 1, 1, "rescale");
    // SYNC holds the next instruction until released
    c = '0; c.op = OP_SYNC; c.sync_id = 8'd3; issue(c, w);
    c = '0; c.op = OP_TMU_COPY; issue(c, w);
    chk(w >= 8, $sformatf("instruction after SYNC held (%0d cycles)", w));
    drain();
    chk(n_dma_overlap == 1, "DMA overlapped DLA work");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

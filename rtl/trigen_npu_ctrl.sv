// trigen_npu_ctrl: instruction dispatch of the NPU.
//
// Takes the instructions the command processor offloads (valid/ready, one per
// cycle at most) and hands them to the function units:
//  * DLA instructions (TMATMUL, MEAN_SQUARE, MEAN, LUT, RESCALE, MUL, ADD) are
//    split into commands of at most CHUNK = 64 IN0 rows, the number of ACC
//    registers per array, and the commands go one per cycle to whichever DLA
//    core is idle. Addresses of each command are offset to its rows. LUTLOAD is
//    sent once to every core, since each core's PPA holds its own tables.
//  * TMU and DMA instructions go to the TMU and the DMAC.
//  * FENCE waits until every unit is idle; SYNC also waits for that and then
//    runs the multi-NPU synchronisation, holding back all later instructions
//    until the sync unit releases them.
// A DLA instruction is accepted once the previous one has finished; TMU and DMA
// instructions run alongside DLA work, so a program overlaps transfers with
// computation and orders them with FENCE. The decomposition into 64-row
// commands follows the paper; the dispatch policy and FENCE are this design's.
module trigen_npu_ctrl
  import trigen_pkg::*;
#(
  parameter int ND    = 4,
  parameter int CHUNK = ACC_REGS
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   i_valid,
  output logic   i_ready,
  input  instr_t instr,
  output logic   dla_valid [ND],
  input  logic   dla_ready [ND],
  output instr_t dla_cmd   [ND],
  input  logic   dla_done  [ND],
  output logic   tmu_valid,
  input  logic   tmu_ready,
  output instr_t tmu_cmd,
  input  logic   tmu_done,
  output logic   dma_valid,
  input  logic   dma_ready,
  output instr_t dma_cmd,
  input  logic   dma_done,
  output logic   sync_start,
  output logic [7:0] sync_id,
  input  logic   sync_done,
  output logic   busy
);
  instr_t d;                          // DLA instruction in progress
  logic   d_act, tmu_busy, dma_busy, sync_busy;
  logic [15:0] n_total, n_iss, n_done;
  logic [15:0] ndone_c;
  int     pick;
  instr_t chunk;

  function automatic int nw(input dtype_e t);
    return (t == DT_FI32) ? 4 : 1;
  endfunction

  wire is_dla = instr.op inside {OP_TMATMUL, OP_MEAN_SQUARE, OP_MEAN, OP_LUT, OP_RESCALE,
                                 OP_MUL, OP_ADD, OP_LUTLOAD};
  wire is_tmu = instr.op inside {OP_TMU_COPY, OP_TMU_TRANSPOSE};
  wire is_dma = instr.op inside {OP_DMA_RD, OP_DMA_WR};
  wire idle_all = !d_act && !tmu_busy && !dma_busy && !sync_busy;

  always_comb begin
    i_ready = 1'b0;
    if (!sync_busy) begin
      if (is_dla)                         i_ready = !d_act;
      else if (is_tmu)                    i_ready = !tmu_busy && tmu_ready;
      else if (is_dma)                    i_ready = !dma_busy && dma_ready;
      else if (instr.op == OP_FENCE || instr.op == OP_SYNC) i_ready = idle_all;
      else                                i_ready = 1'b1;
    end
  end

  assign tmu_valid  = i_valid && i_ready && is_tmu;
  assign tmu_cmd    = instr;
  assign dma_valid  = i_valid && i_ready && is_dma;
  assign dma_cmd    = instr;
  assign sync_start = i_valid && i_ready && (instr.op == OP_SYNC);
  assign sync_id    = instr.sync_id;
  assign busy       = !idle_all;

  // the next command of the DLA instruction and the core that takes it
  always_comb begin
    int r0, rows;
    r0    = int'(n_iss) * CHUNK;
    rows  = int'(d.rows) - r0;
    if (rows > CHUNK) rows = CHUNK;
    chunk = d;
    if (d.op != OP_LUTLOAD) begin
      chunk.rows = 16'(rows);
      chunk.in0  = addr_t'(int'(d.in0) + r0 * int'(d.kblk) * nw(d.in0_t));
      case (d.op)
        OP_TMATMUL: begin
          chunk.out  = addr_t'(int'(d.out) + r0 * int'(d.nblk) * nw(d.out_t));
          chunk.psum = addr_t'(int'(d.psum) + r0 * int'(d.nblk) * 4);
        end
        OP_MEAN, OP_MEAN_SQUARE: chunk.out = addr_t'(int'(d.out) + r0 / 8);
        default: begin
          chunk.out = addr_t'(int'(d.out) + r0 * int'(d.kblk) * nw(d.out_t));
          chunk.in1 = addr_t'(int'(d.in1) + r0 * int'(d.kblk) * nw(d.in1_t));
          if (d.op == OP_RESCALE) chunk.aux = addr_t'(int'(d.aux) + r0 / 8);
        end
      endcase
    end
    pick = -1;
    if (d_act && n_iss < n_total) begin
      if (d.op == OP_LUTLOAD) begin
        if (dla_ready[n_iss[$clog2(ND > 1 ? ND : 2)-1:0]]) pick = int'(n_iss);
      end else begin
        for (int i = ND - 1; i >= 0; i--) if (dla_ready[i]) pick = i;
      end
    end
    for (int i = 0; i < ND; i++) begin
      dla_valid[i] = (pick == i);
      dla_cmd[i]   = chunk;
    end
    ndone_c = '0;
    for (int i = 0; i < ND; i++) ndone_c = ndone_c + 16'(dla_done[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d <= '0; d_act <= 1'b0; tmu_busy <= 1'b0; dma_busy <= 1'b0; sync_busy <= 1'b0;
      n_total <= '0; n_iss <= '0; n_done <= '0;
    end else begin
      if (d_act) begin
        if (pick >= 0) n_iss <= n_iss + 1'b1;
        n_done <= n_done + ndone_c;
        if (n_done + ndone_c == n_total) d_act <= 1'b0;
      end
      if (i_valid && i_ready && is_dla) begin
        d <= instr; d_act <= 1'b1; n_iss <= '0; n_done <= '0;
        n_total <= (instr.op == OP_LUTLOAD) ? 16'(ND) : 16'((int'(instr.rows) + CHUNK - 1) / CHUNK);
      end
      if (tmu_valid) tmu_busy <= 1'b1; else if (tmu_done) tmu_busy <= 1'b0;
      if (dma_valid) dma_busy <= 1'b1; else if (dma_done) dma_busy <= 1'b0;
      if (sync_start) sync_busy <= 1'b1; else if (sync_done) sync_busy <= 1'b0;
    end
  end
endmodule

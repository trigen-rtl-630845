// trigen_npu: one TriGen NPU, the top of this design.
//
// Instructions from the command processor (a RISC-V core outside this
// design) enter at i_valid/i_ready/instr. The controller hands them to four
// DLA cores, the TMU, the DMAC and the sync unit. All of them work on the
// 1 MiB global buffer, which has one port per DLA core, one for the TMU and
// one for the DMAC. The DMAC reaches DRAM through the system-bus port
// (b_*), which is left to the SoC. The sync_* ports connect to the
// other NPUs of a multi-NPU system; with NUM_NPUS = 1, the paper's main
// configuration, a SYNC instruction completes at once. Defaults follow the
// paper's main configuration: four DLA cores per NPU, a 32x32 MPA per core
// and 1 MiB of on-chip memory (32768 words of 32 data bytes). busy is high
// while any instruction is still in progress.
module trigen_npu
  import trigen_pkg::*;
#(
  parameter int NUM_DLA  = 4,
  parameter int SRAM_WORDS = 32768,
  parameter int NUM_NPUS = 1,
  parameter int NR = (NUM_NPUS > 1) ? NUM_NPUS - 1 : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        i_valid,
  output logic        i_ready,
  input  instr_t      instr,
  output logic        busy,
  // system bus (DMAC master)
  output logic        b_req,
  output logic        b_we,
  output logic [31:0] b_addr,
  output word_t       b_wdata,
  input  logic        b_gnt,
  input  logic        b_rvalid,
  input  word_t       b_rdata,
  // multi-NPU synchronisation
  output logic        sync_out_valid,
  output logic [7:0]  sync_out_id,
  input  logic        sync_in_valid [NR],
  input  logic [7:0]  sync_in_id    [NR]
);
  localparam int NP = NUM_DLA + 2;    // DLA cores, TMU, DMAC
  localparam int P_TMU = NUM_DLA;
  localparam int P_DMA = NUM_DLA + 1;

  logic  m_req [NP], m_we [NP], m_gnt [NP], m_rvalid [NP];
  addr_t m_addr [NP];
  word_t m_wdata [NP], m_rdata [NP];

  logic   dla_valid [NUM_DLA], dla_ready [NUM_DLA], dla_done [NUM_DLA];
  instr_t dla_cmd [NUM_DLA];
  logic   tmu_valid, tmu_ready, tmu_done, dma_valid, dma_ready, dma_done;
  instr_t tmu_cmd, dma_cmd;
  logic   sync_start, sync_done, sync_busy;
  logic [7:0] sync_id;

  trigen_npu_ctrl #(.ND(NUM_DLA)) u_ctrl (
    .clk, .rst_n, .i_valid, .i_ready, .instr,
    .dla_valid, .dla_ready, .dla_cmd, .dla_done,
    .tmu_valid, .tmu_ready, .tmu_cmd, .tmu_done,
    .dma_valid, .dma_ready, .dma_cmd, .dma_done,
    .sync_start, .sync_id, .sync_done, .busy);

  for (genvar i = 0; i < NUM_DLA; i++) begin : g_dla
    trigen_dla_core u_dla (
      .clk, .rst_n, .cmd_valid(dla_valid[i]), .cmd_ready(dla_ready[i]), .cmd(dla_cmd[i]),
      .done(dla_done[i]),
      .m_req(m_req[i]), .m_we(m_we[i]), .m_addr(m_addr[i]), .m_wdata(m_wdata[i]),
      .m_gnt(m_gnt[i]), .m_rvalid(m_rvalid[i]), .m_rdata(m_rdata[i]));
  end

  trigen_tmu u_tmu (
    .clk, .rst_n, .cmd_valid(tmu_valid), .cmd_ready(tmu_ready), .cmd(tmu_cmd), .done(tmu_done),
    .m_req(m_req[P_TMU]), .m_we(m_we[P_TMU]), .m_addr(m_addr[P_TMU]), .m_wdata(m_wdata[P_TMU]),
    .m_gnt(m_gnt[P_TMU]), .m_rvalid(m_rvalid[P_TMU]), .m_rdata(m_rdata[P_TMU]));

  trigen_dmac u_dmac (
    .clk, .rst_n, .cmd_valid(dma_valid), .cmd_ready(dma_ready), .cmd(dma_cmd), .done(dma_done),
    .m_req(m_req[P_DMA]), .m_we(m_we[P_DMA]), .m_addr(m_addr[P_DMA]), .m_wdata(m_wdata[P_DMA]),
    .m_gnt(m_gnt[P_DMA]), .m_rvalid(m_rvalid[P_DMA]), .m_rdata(m_rdata[P_DMA]),
    .b_req, .b_we, .b_addr, .b_wdata, .b_gnt, .b_rvalid, .b_rdata);

  trigen_global_buffer #(.NPORT(NP), .WORDS(SRAM_WORDS)) u_gbuf (
    .clk, .rst_n, .req(m_req), .we(m_we), .addr(m_addr), .wdata(m_wdata),
    .gnt(m_gnt), .rvalid(m_rvalid), .rdata(m_rdata));

  trigen_sync_unit #(.NUM_NPUS(NUM_NPUS), .NR(NR)) u_sync (
    .clk, .rst_n, .start(sync_start), .sync_id, .done(sync_done), .busy(sync_busy),
    .sync_out_valid, .sync_out_id, .sync_in_valid, .sync_in_id);
endmodule

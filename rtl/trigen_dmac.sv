// trigen_dmac: DMA controller between DRAM (over the system bus) and the
// on-chip memory.
//
// OP_DMA_RD copies len words from bus address dram_addr into the on-chip
// memory at word address out; OP_DMA_WR copies len words from the on-chip
// memory at out to the bus. Words are 264 bits on both sides. The source is
// read with as many requests in flight as the DEPTH-entry FIFO has free
// entries, so the bus may return read data with any latency (in order); the
// FIFO drains into the destination as fast as it grants. done pulses for one
// cycle after the last write has been granted. Bus port: req/we/addr/wdata
// with gnt for acceptance, rvalid/rdata for in-order read data.
// The paper only names the DMAC; everything here is this design's.
module trigen_dmac
  import trigen_pkg::*;
#(
  parameter int DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  instr_t      cmd,
  output logic        done,
  // on-chip memory port
  output logic        m_req,
  output logic        m_we,
  output addr_t       m_addr,
  output word_t       m_wdata,
  input  logic        m_gnt,
  input  logic        m_rvalid,
  input  word_t       m_rdata,
  // system bus port
  output logic        b_req,
  output logic        b_we,
  output logic [31:0] b_addr,
  output word_t       b_wdata,
  input  logic        b_gnt,
  input  logic        b_rvalid,
  input  word_t       b_rdata
);
  localparam int CW = $clog2(DEPTH) + 1;
  typedef enum logic [1:0] {D_IDLE, D_RUN, D_DONE} st_e;
  st_e st;
  logic        to_sram;            // 1: DRAM -> SRAM
  logic [15:0] len, rd_iss, wr_iss;
  logic [31:0] dram_a;
  addr_t       sram_a;
  word_t       fifo [DEPTH];
  logic [$clog2(DEPTH)-1:0] wp, rp;
  logic [CW-1:0] cnt, inflight;

  wire src_req = (st == D_RUN) && (rd_iss < len) && (32'(cnt) + 32'(inflight) < DEPTH);
  wire dst_req = (st == D_RUN) && (cnt != 0);
  wire src_gnt = to_sram ? (b_req && !b_we && b_gnt) : (m_req && !m_we && m_gnt);
  wire dst_gnt = to_sram ? (m_req && m_we && m_gnt) : (b_req && b_we && b_gnt);
  wire rsp     = to_sram ? b_rvalid : m_rvalid;
  wire word_t rsp_d = to_sram ? b_rdata : m_rdata;

  always_comb begin
    b_req = 1'b0; b_we = 1'b0; b_addr = '0; b_wdata = '0;
    m_req = 1'b0; m_we = 1'b0; m_addr = '0; m_wdata = '0;
    if (to_sram) begin
      // write to SRAM has priority over issuing another bus read
      m_req = dst_req; m_we = 1'b1; m_addr = addr_t'(sram_a + addr_t'(wr_iss)); m_wdata = fifo[rp];
      b_req = src_req; b_we = 1'b0; b_addr = dram_a + 32'(rd_iss);
    end else begin
      b_req = dst_req; b_we = 1'b1; b_addr = dram_a + 32'(wr_iss); b_wdata = fifo[rp];
      m_req = src_req; m_we = 1'b0; m_addr = addr_t'(sram_a + addr_t'(rd_iss));
    end
  end

  assign cmd_ready = (st == D_IDLE);
  assign done      = (st == D_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; to_sram <= 1'b0; len <= '0; rd_iss <= '0; wr_iss <= '0;
      dram_a <= '0; sram_a <= '0; wp <= '0; rp <= '0; cnt <= '0; inflight <= '0;
      for (int i = 0; i < DEPTH; i++) fifo[i] <= '0;
    end else begin
      case (st)
        D_IDLE: if (cmd_valid) begin
          to_sram <= (cmd.op == OP_DMA_RD);
          len <= cmd.len; dram_a <= cmd.dram_addr; sram_a <= cmd.out;
          rd_iss <= '0; wr_iss <= '0; wp <= '0; rp <= '0; cnt <= '0; inflight <= '0;
          st <= (cmd.len == 0) ? D_DONE : D_RUN;
        end
        D_RUN: begin
          if (src_gnt) rd_iss <= rd_iss + 1'b1;
          if (rsp) begin fifo[wp] <= rsp_d; wp <= wp + 1'b1; end
          if (dst_gnt) begin rp <= rp + 1'b1; wr_iss <= wr_iss + 1'b1; end
          cnt      <= cnt + CW'(rsp) - CW'(dst_gnt);
          inflight <= inflight + CW'(src_gnt) - CW'(rsp);
          if (dst_gnt && wr_iss + 1'b1 == len) st <= D_DONE;
        end
        default: st <= D_IDLE;
      endcase
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(rsp && cnt == CW'(DEPTH)));
endmodule

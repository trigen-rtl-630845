// trigen_dla_core: one DLA core (MPA + ACC + PPA with its buffers and sequencer).
//
// A core runs one command at a time: a piece of an instruction covering at most
// 64 IN0 rows (the number of ACC registers per array), as handed out by the
// NPU controller. It reads its operands from, and writes its results to, the
// shared on-chip memory through one word port (request/grant, read data one
// cycle after the grant).
//
// TMATMUL (OUT = IN0 x IN1^T). IN0 is rows x (32*kblk) and IN1 is
// (32*nblk) x (32*kblk), both stored one 32-element block per word, row major.
// For each 32-column output block n and each depth block k the 32 IN1 row
// blocks are loaded into WBUF, the stationary tile, and then one IN0 row block
// per cycle streams through the MPA, whose 32 arrays accumulate into ACC
// register r. After the last depth block every row r of the ACC goes through
// the PPA (bias and/or PSUM add, CWQ rescale, optional fused LUT, output
// format) and is written out: 4 words per 32 columns for FI32, 1 word for
// MX8/INT8/UINT8. The stationary-IN1, broadcast-IN0 flow and the 64-row command
// follow the paper; the order of loops and the memory layout are this design's.
//
// Row instructions (MEAN_SQUARE, MEAN, LUT, RESCALE, MUL, ADD) go through the
// PPA only, one 32-element block per pass: IN0 (and IN1 for MUL/ADD, or the
// row's FI32 scale for RESCALE) is read into the input row buffer (IBUF), the
// PPA processes it and the output register (OBUF) is written back. MEAN and
// MEAN_SQUARE sum over the row and write one FI32 per row, eight rows per word.
// LUTLOAD copies 34 words (16 + 256 table entries) into the PPA's LUT.
// The paper places MEAN, RESCALE and the elementwise operations in the PPA; it
// does not say which unit computes MEAN_SQUARE, here also the PPA (x*x in the
// Rescale stage, then the row sum). Loading WBUF and streaming IN0 are not
// overlapped in this design.
module trigen_dla_core
  import trigen_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   cmd_valid,
  output logic   cmd_ready,
  input  instr_t cmd,
  output logic   done,
  // on-chip memory port
  output logic   m_req,
  output logic   m_we,
  output addr_t  m_addr,
  output word_t  m_wdata,
  input  logic   m_gnt,
  input  logic   m_rvalid,
  input  word_t  m_rdata
);
  typedef enum logic [4:0] {
    S_IDLE, S_LL, T_AUX, T_LDW, T_STR, T_PS, T_PROC, T_WAIT, T_WR,
    E_RD0, E_RD1, E_PROC, E_WAIT, E_RED, E_WR, S_DONE
  } state_e;

  state_e st;
  instr_t c;
  logic [7:0]  n, k;
  logic [15:0] r;
  logic [7:0]  iss, rcv;
  logic [7:0]  len;
  int          a_i;
  word_t       wbuf [VEC];               // WBUF: stationary IN1 tile
  fi32_t       bufa [VEC], bufb [VEC];   // IBUF: input row staging
  fi32_t       bias_r [VEC], cwq_r [VEC], psum_r [VEC];
  fi32_t       scale_r, racc;
  fi32_t       pack [8];

  // PPA / MPA hookups
  logic        mpa_valid;
  fi32_t       acc_row [VEC];
  fi32_t       p_x [VEC], p_add [VEC], p_mul [VEC], p_y [VEC], p_red;
  logic        p_valid, p_add_en, p_mul_en, p_lut_en, p_ovalid;
  word_t       p_word;
  logic        ll_we;
  fi32_t       red_next;

  function automatic int nw(input dtype_e t);
    return (t == DT_FI32) ? 4 : 1;
  endfunction

  wire is_red = (c.op == OP_MEAN) || (c.op == OP_MEAN_SQUARE);
  wire is_mem = (st == S_LL) || (st == T_AUX) || (st == T_LDW) || (st == T_STR) ||
                (st == T_PS) || (st == T_WR) || (st == E_RD0) || (st == E_RD1) || (st == E_WR);
  wire is_wr  = (st == T_WR) || (st == E_WR);

  // words in the current memory phase and the address of word a_i
  always_comb begin
    len = 8'd0;
    case (st)
      S_LL:  len = 8'd34;
      T_AUX: len = (c.bias_en ? 8'd4 : 8'd0) + (c.cwq_en ? 8'd4 : 8'd0);
      T_LDW: len = 8'(VEC);
      T_STR: len = 8'(c.rows);
      T_PS:  len = c.psum_en ? 8'd4 : 8'd0;
      T_WR:  len = 8'(nw(c.out_t));
      E_RD0: len = 8'(nw(c.in0_t));
      E_RD1: len = (c.op == OP_MUL || c.op == OP_ADD) ? 8'(nw(c.in1_t)) :
                   (c.op == OP_RESCALE && k == 0) ? 8'd1 : 8'd0;
      E_WR:  len = is_red ? 8'd1 : 8'(nw(c.out_t));
      default: len = 8'd0;
    endcase
  end

  always_comb begin
    int i, a;
    i = int'(iss);
    a = 0;
    case (st)
      S_LL:  a = int'(c.in0) + i;
      T_AUX: a = (c.bias_en && i < 4) ? int'(c.aux) + 4*int'(n) + i
                                      : int'(c.aux2) + 4*int'(n) + i - (c.bias_en ? 4 : 0);
      T_LDW: a = int'(c.in1) + (VEC*int'(n) + i) * int'(c.kblk) + int'(k);
      T_STR: a = int'(c.in0) + i * int'(c.kblk) + int'(k);
      T_PS:  a = int'(c.psum) + int'(r) * 4 * int'(c.nblk) + 4*int'(n) + i;
      T_WR:  a = int'(c.out) + (int'(r) * int'(c.nblk) + int'(n)) * nw(c.out_t) + i;
      E_RD0: a = int'(c.in0) + (int'(r) * int'(c.kblk) + int'(k)) * nw(c.in0_t) + i;
      E_RD1: a = (c.op == OP_RESCALE) ? int'(c.aux) + int'(r) / 8
                                      : int'(c.in1) + (int'(r) * int'(c.kblk) + int'(k)) * nw(c.in1_t) + i;
      E_WR:  a = is_red ? int'(c.out) + int'(r) / 8
                        : int'(c.out) + (int'(r) * int'(c.kblk) + int'(k)) * nw(c.out_t) + i;
      default: a = 0;
    endcase
    a_i = a;
  end

  assign m_req  = is_mem && (iss < len);
  assign m_we   = is_wr;
  assign m_addr = addr_t'(a_i);
  always_comb begin
    m_wdata = '0;
    if (st == E_WR && is_red) begin
      for (int l = 0; l < 8; l++) m_wdata[32*l +: 32] = pack[l];
    end else if (c.out_t == DT_FI32) begin
      for (int l = 0; l < 8; l++) m_wdata[32*l +: 32] = p_y[8*int'(iss) + l];
    end else begin
      m_wdata = p_word;
    end
  end

  wire phase_done = is_wr ? (iss == len) : (rcv == len);
  assign cmd_ready = (st == S_IDLE);
  assign done      = (st == S_DONE);
  assign mpa_valid = (st == T_STR) && m_rvalid;
  assign ll_we     = (st == S_LL) && m_rvalid;

  // PPA operand selection
  always_comb begin
    p_valid  = (st == T_PROC) || (st == E_PROC);
    p_add_en = 1'b0; p_mul_en = 1'b0; p_lut_en = 1'b0;
    for (int l = 0; l < VEC; l++) begin
      p_x[l] = bufa[l]; p_add[l] = bufb[l]; p_mul[l] = bufb[l];
    end
    if (st == T_PROC) begin
      p_add_en = c.bias_en || c.psum_en;
      p_mul_en = c.cwq_en;
      p_lut_en = c.lut_en;
      for (int l = 0; l < VEC; l++) begin
        p_x[l]   = acc_row[l];
        p_add[l] = (c.bias_en && c.psum_en) ? fi32_add(bias_r[l], psum_r[l]) :
                   c.bias_en ? bias_r[l] : psum_r[l];
        p_mul[l] = cwq_r[l];
      end
    end else begin
      p_add_en = (c.op == OP_ADD);
      p_mul_en = (c.op == OP_MUL) || (c.op == OP_RESCALE) || (c.op == OP_MEAN_SQUARE);
      p_lut_en = (c.op == OP_LUT);
      for (int l = 0; l < VEC; l++) begin
        if (c.op == OP_RESCALE) p_mul[l] = scale_r;
        if (c.op == OP_MEAN_SQUARE) p_mul[l] = bufa[l];
      end
    end
  end

  assign red_next = (k == 0) ? p_red : fi32_add(racc, p_red);

  trigen_mpa u_mpa (
    .clk, .rst_n, .in_valid(mpa_valid), .in_word(m_rdata), .in_t(c.in0_t),
    .acc_clear(k == 0), .acc_idx(6'(rcv)), .w_tile(wbuf), .w_t(c.in1_t),
    .rd_idx(6'(r)), .rd_row(acc_row));

  trigen_ppa u_ppa (
    .clk, .rst_n, .in_valid(p_valid), .x(p_x), .addv(p_add), .mulv(p_mul),
    .add_en(p_add_en), .mul_en(p_mul_en), .lut_en(p_lut_en), .func(c.lut),
    .out_t(c.out_t), .zp(c.zp),
    .ld_we(ll_we), .ld_widx(6'(rcv)), .ld_word(m_rdata[255:0]),
    .ld_tbl_exp(c.tbl_exp), .ld_exp_we(st == S_LL && rcv == 8'd0 && m_rvalid),
    .out_valid(p_ovalid), .y(p_y), .red(p_red), .out_word(p_word));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; n <= '0; k <= '0; r <= '0; iss <= '0; rcv <= '0;
      scale_r <= '0; racc <= '0;
      for (int l = 0; l < VEC; l++) begin
        wbuf[l] <= '0; bufa[l] <= '0; bufb[l] <= '0;
        bias_r[l] <= '0; cwq_r[l] <= '0; psum_r[l] <= '0;
      end
      for (int l = 0; l < 8; l++) pack[l] <= '0;
    end else begin
      if (m_req && m_gnt) iss <= iss + 1'b1;
      // read responses
      if (m_rvalid) begin
        rcv <= rcv + 1'b1;
        case (st)
          T_AUX: for (int l = 0; l < 8; l++)
                   if (c.bias_en && rcv < 4) bias_r[8*int'(rcv) + l] <= m_rdata[32*l +: 32];
                   else cwq_r[8*(int'(rcv) - (c.bias_en ? 4 : 0)) + l] <= m_rdata[32*l +: 32];
          T_LDW: wbuf[rcv[4:0]] <= m_rdata;
          T_PS:  for (int l = 0; l < 8; l++) psum_r[8*int'(rcv) + l] <= m_rdata[32*l +: 32];
          E_RD0: for (int l = 0; l < VEC; l++)
                   if (c.in0_t != DT_FI32 || l / 8 == int'(rcv)) bufa[l] <= word_elem(m_rdata, l, c.in0_t);
          E_RD1: if (c.op == OP_RESCALE) scale_r <= m_rdata[32*(int'(r) % 8) +: 32];
                 else for (int l = 0; l < VEC; l++)
                   if (c.in1_t != DT_FI32 || l / 8 == int'(rcv)) bufb[l] <= word_elem(m_rdata, l, c.in1_t);
          default: ;
        endcase
      end
      if (is_mem && phase_done) begin
        iss <= '0; rcv <= '0;
      end
      case (st)
        S_IDLE: if (cmd_valid) begin
          c <= cmd; n <= '0; k <= '0; r <= '0; iss <= '0; rcv <= '0;
          case (cmd.op)
            OP_LUTLOAD: st <= S_LL;
            OP_TMATMUL: st <= T_AUX;
            OP_NOP:     st <= S_DONE;
            default:    st <= E_RD0;
          endcase
        end
        S_LL:  if (phase_done) st <= S_DONE;
        T_AUX: if (phase_done) st <= T_LDW;
        T_LDW: if (phase_done) st <= T_STR;
        T_STR: if (phase_done) begin
          if (k + 1'b1 < c.kblk) begin k <= k + 1'b1; st <= T_LDW; end
          else begin r <= '0; st <= T_PS; end
        end
        T_PS:   if (phase_done) st <= T_PROC;
        T_PROC: st <= T_WAIT;
        T_WAIT: st <= T_WR;
        T_WR: if (phase_done) begin
          if (r + 1'b1 < c.rows) begin r <= r + 1'b1; st <= T_PS; end
          else if (n + 1'b1 < c.nblk) begin n <= n + 1'b1; k <= '0; st <= T_AUX; end
          else st <= S_DONE;
        end
        E_RD0: if (phase_done) st <= E_RD1;
        E_RD1: if (phase_done) st <= E_PROC;
        E_PROC: st <= E_WAIT;
        E_WAIT: st <= is_red ? E_RED : E_WR;
        E_RED: begin
          racc <= red_next;
          if (k + 1'b1 == c.kblk) begin
            if (r[2:0] == 3'd0) begin
              for (int l = 1; l < 8; l++) pack[l] <= '0;
            end
            pack[r[2:0]] <= red_next;
            if (r[2:0] == 3'd7 || r + 1'b1 == c.rows) st <= E_WR;
            else begin k <= '0; r <= r + 1'b1; st <= E_RD0; end
          end else begin
            k <= k + 1'b1; st <= E_RD0;
          end
        end
        E_WR: if (phase_done) begin
          if (k + 1'b1 < c.kblk && !is_red) begin k <= k + 1'b1; st <= E_RD0; end
          else if (r + 1'b1 < c.rows) begin k <= '0; r <= r + 1'b1; st <= E_RD0; end
          else st <= S_DONE;
        end
        S_DONE: st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  // a TMATMUL command may not exceed the ACC depth
  a_rows: assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_IDLE && cmd_valid && cmd.op == OP_TMATMUL) |-> (cmd.rows <= 16'(ACC_REGS) && cmd.rows != 0));
endmodule

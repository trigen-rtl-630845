// trigen_tmu: tensor manipulation unit (transpose, split, concatenate).
//
// Works on tensors in the on-chip memory through one word port, using a tile
// buffer of 32 words.
//   OP_TMU_COPY      rows x kblk words (kblk <= 32) from in0 with a row stride of
//                    sstride words to out with a row stride of dstride words.
//                    Split and concatenate are such strided copies: a column
//                    slice of a wider tensor, or a tensor placed into one.
//   OP_TMU_TRANSPOSE an 8-bit element matrix of rows x (32*kblk) (rows a
//                    multiple of 32), stored one 32-element block per word,
//                    becomes its (32*kblk) x rows transpose at out, one 32x32
//                    tile at a time: 32 words are read, then 32 words holding
//                    the tile's columns are written. The shared exponent of a
//                    written word is that of the tile's first source word, so
//                    transposition is exact for INT8/UINT8 data only (the paper
//                    notes that MX data cannot be transposed as is).
// done pulses for one cycle when the operation is complete. The paper lists
// the three operations; the tiling and the copy semantics are this design's.
module trigen_tmu
  import trigen_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   cmd_valid,
  output logic   cmd_ready,
  input  instr_t cmd,
  output logic   done,
  output logic   m_req,
  output logic   m_we,
  output addr_t  m_addr,
  output word_t  m_wdata,
  input  logic   m_gnt,
  input  logic   m_rvalid,
  input  word_t  m_rdata
);
  typedef enum logic [1:0] {U_IDLE, U_RD, U_WR, U_DONE} st_e;
  st_e st;
  instr_t c;
  word_t tile [VEC];
  logic [15:0] row, ti;
  logic [7:0]  tj;
  logic [5:0]  iss, rcv, len;
  logic tr;

  assign tr  = (c.op == OP_TMU_TRANSPOSE);
  assign len = tr ? 6'd32 : 6'(c.kblk);

  always_comb begin
    int a;
    a = 0;
    if (st == U_RD)
      a = tr ? int'(c.in0) + (int'(ti) * 32 + int'(iss)) * int'(c.kblk) + int'(tj)
             : int'(c.in0) + int'(row) * int'(c.sstride) + int'(iss);
    else
      a = tr ? int'(c.out) + (int'(tj) * 32 + int'(iss)) * (int'(c.rows) / 32) + int'(ti)
             : int'(c.out) + int'(row) * int'(c.dstride) + int'(iss);
    m_addr = addr_t'(a);
    m_wdata = '0;
    if (tr) begin
      m_wdata[263:256] = tile[0][263:256];
      for (int i = 0; i < VEC; i++) m_wdata[8*i +: 8] = tile[i][8*int'(iss[4:0]) +: 8];
    end else m_wdata = tile[iss[4:0]];
  end

  assign m_req     = ((st == U_RD) || (st == U_WR)) && (iss < len);
  assign m_we      = (st == U_WR);
  assign cmd_ready = (st == U_IDLE);
  assign done      = (st == U_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= U_IDLE; c <= '0; row <= '0; ti <= '0; tj <= '0; iss <= '0; rcv <= '0;
      for (int i = 0; i < VEC; i++) tile[i] <= '0;
    end else begin
      if (m_req && m_gnt) iss <= iss + 1'b1;
      if (m_rvalid) begin tile[rcv[4:0]] <= m_rdata; rcv <= rcv + 1'b1; end
      case (st)
        U_IDLE: if (cmd_valid) begin
          c <= cmd; row <= '0; ti <= '0; tj <= '0; iss <= '0; rcv <= '0;
          st <= (cmd.rows == 0 || cmd.kblk == 0) ? U_DONE : U_RD;
        end
        U_RD: if (rcv == len) begin st <= U_WR; iss <= '0; rcv <= '0; end
        U_WR: if (iss == len) begin
          iss <= '0;
          st  <= U_RD;
          if (tr) begin
            if (tj + 1'b1 < c.kblk) tj <= tj + 1'b1;
            else begin
              tj <= '0;
              ti <= ti + 1'b1;
              if (32 * (int'(ti) + 1) >= int'(c.rows)) st <= U_DONE;
            end
          end else begin
            row <= row + 1'b1;
            if (row + 1'b1 == c.rows) st <= U_DONE;
          end
        end
        default: st <= U_IDLE;
      endcase
    end
  end

  a_copy_width: assert property (@(posedge clk) disable iff (!rst_n)
    (st == U_IDLE && cmd_valid && cmd.op == OP_TMU_COPY) |-> (cmd.kblk <= 8'(VEC)));
endmodule

// trigen_pkg: types, constants and arithmetic helpers shared by the TriGen NPU.
//
// FI32 is the intermediate number format of the datapath: an 8-bit biased
// exponent in bits 31:24 and a 24-bit two's-complement fraction in bits 23:0.
// Its value is FRAC * 2^-22 * 2^(EXP-127). The field split and the existence
// of an implicit scale follow the paper, as does exponent 127 for plain
// integer data; the value 2^-22 of the scale, keeping values normalised
// (|FRAC| in [2^22, 2^23)) and EXP=0 with FRAC=0 for zero are this design's.
//
// A memory word of the on-chip buffer is 264 bits: a shared 8-bit exponent in
// bits 263:256 and 256 data bits. It holds either one 32-element vector of
// 8-bit elements (MXINT8 with its shared exponent, INT8 or UINT8 with exponent
// 127) or eight FI32 values (exponent field unused). An MX block therefore has
// 32 elements, the length of one MAC array's input vector. The element value of
// MXINT8 is taken as q * 2^(E-127), so integer data is MX data with E = 127.
package trigen_pkg;

  localparam int VEC      = 32;          // MPA array length and number of arrays
  localparam int ACC_REGS = 64;          // partial-sum registers per array
  localparam int WORD_W   = 264;         // on-chip memory word
  localparam int ADDR_W   = 15;          // word address (32768 words = 1 MiB of data)
  localparam int EXP_BIAS = 127;
  localparam int FRAC_W   = 24;
  localparam int A_W      = 9;           // MAC operand: 8-bit element, signed or zero-extended
  localparam int SUM_W    = 2*A_W + $clog2(VEC);

  typedef struct packed {
    logic        [7:0]  exp;
    logic signed [23:0] frac;
  } fi32_t;

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [ADDR_W-1:0] addr_t;

  typedef enum logic [1:0] {DT_FI32 = 2'd0, DT_MX8 = 2'd1, DT_INT8 = 2'd2, DT_UINT8 = 2'd3} dtype_e;

  typedef enum logic [4:0] {
    OP_NOP, OP_TMATMUL, OP_MEAN_SQUARE, OP_MEAN, OP_LUT, OP_RESCALE, OP_MUL, OP_ADD,
    OP_LUTLOAD, OP_DMA_RD, OP_DMA_WR, OP_TMU_COPY, OP_TMU_TRANSPOSE, OP_SYNC, OP_FENCE
  } op_e;

  // LUT flags of the LUT instruction: INV reciprocal, SQR square root,
  // EXP exponential, RLU SiLU. INV together with SQR is inverse square root.
  typedef struct packed {
    logic inv, sqr, ex, rlu;
  } lut_flags_t;

  // One instruction as offloaded by the command processor, also used for the
  // 64-row commands the controller hands to the DLA cores.
  typedef struct packed {
    op_e         op;
    lut_flags_t  lut;
    logic        lut_en;     // fuse the LUT into TMATMUL / apply it in OP_LUT
    logic        bias_en;    // TMATMUL: add per-column FI32 bias (aux)
    logic        psum_en;    // TMATMUL: add per-element FI32 PSUM (psum)
    logic        cwq_en;     // TMATMUL: channel-wise rescale (aux2)
    dtype_e      in0_t, in1_t, out_t;
    logic [7:0]  zp;         // zero point for INT outputs
    logic signed [7:0] tbl_exp; // LUTLOAD: exponent of the table entries
    logic [15:0] rows;       // rows of IN0 (TMU: rows of the source)
    logic [7:0]  kblk;       // 32-element blocks along the depth (TMU: words per row)
    logic [7:0]  nblk;       // 32-column blocks of the output (TMATMUL)
    addr_t       in0, in1, out, aux, aux2, psum; // aux: bias or row scale, aux2: CWQ
    logic [15:0] sstride, dstride; // TMU copy strides in words
    logic [31:0] dram_addr;  // DMA: word address on the system bus
    logic [15:0] len;        // DMA: words
    logic [7:0]  sync_id;
  } instr_t;

  // ---------------------------------------------------------------- FI32 math
  // value(v, e) = v * 2^(e-149); returns the normalised FI32 of that value.
  function automatic fi32_t fi32_norm(input logic signed [63:0] v, input int e);
    logic [63:0] a;
    int p, sh, en;
    logic signed [63:0] r;
    fi32_t o;
    a = v[63] ? 64'(-v) : 64'(v);
    if (a == '0) return '0;
    // index of the leading one, by binary search (six steps)
    p = 0;
    for (int s = 32; s >= 1; s = s / 2) if ((a >> (p + s)) != '0) p = p + s;
    sh = p - 22;
    r  = (sh >= 0) ? (v >>> sh) : (v <<< (-sh));
    en = e + sh;
    if (en < 1) return '0;
    if (en > 255) begin
      o.exp  = 8'd255;
      o.frac = v[63] ? 24'sh800000 : 24'sh7fffff;
      return o;
    end
    o.exp  = 8'(en);
    o.frac = r[23:0];
    return o;
  endfunction

  function automatic fi32_t fi32_add(input fi32_t a, input fi32_t b);
    int ea, eb, m;
    logic signed [63:0] va, vb;
    if (a.frac == 0) return b;
    if (b.frac == 0) return a;
    ea = int'(a.exp); eb = int'(b.exp);
    m  = (ea > eb) ? ea : eb;
    va = 64'(a.frac) <<< 16;
    vb = 64'(b.frac) <<< 16;
    va = (m - ea > 62) ? (va >>> 62) : (va >>> (m - ea));
    vb = (m - eb > 62) ? (vb >>> 62) : (vb >>> (m - eb));
    return fi32_norm(va + vb, m - 16);
  endfunction

  function automatic fi32_t fi32_mul(input fi32_t a, input fi32_t b);
    logic signed [63:0] p;
    if (a.frac == 0 || b.frac == 0) return '0;
    p = 64'(a.frac) * 64'(b.frac);
    return fi32_norm(p, int'(a.exp) + int'(b.exp) - 149);
  endfunction

  // 8-bit element of a memory word to a MAC operand
  function automatic logic signed [A_W-1:0] elem_op(input logic [7:0] q, input dtype_e t);
    return (t == DT_UINT8) ? $signed({1'b0, q}) : $signed({q[7], q});
  endfunction

  // element i of a word (any type) as FI32; FI32 words hold lanes (i % 8)
  function automatic fi32_t word_elem(input word_t w, input int i, input dtype_e t);
    if (t == DT_FI32) return w[32*(i%8) +: 32];
    return fi32_norm(64'(elem_op(w[8*i +: 8], t)), int'(w[263:256]) + 22);
  endfunction

endpackage

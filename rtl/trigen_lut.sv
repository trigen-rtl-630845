// trigen_lut: lookup-table unit for nonlinear functions (LANES lookups per cycle).
//
// How it works, per lane:
//  1. Preprocessing turns the FI32 input x into a table position pos (a
//     POS_W-bit fraction of the table's input span) and an output exponent oe,
//     depending on the function flags:
//       INV      1/x       : x = 2^e * m, pos = m-1, oe = -e
//       SQR      sqrt(x)   : pos = {e odd, m-1}, oe = floor(e/2)
//       INV+SQR  1/sqrt(x) : pos = {e even, m-1}, oe = -ceil(e/2)
//       EXP      e^x       : t = x*log2(e), pos = t - floor(t), oe = floor(t)
//       RLU      SiLU(x)   : e <= K: pos = (x + 2^(K+1)) / 2^(K+2), oe = 0;
//                            e > K, x > 0: same with 2^K*m, oe = e - K;
//                            e > K, x < 0: result 0
//     The decompositions for inverse square root and SiLU (with the constant
//     K) are the paper's; the exponential's split into 2^floor(t) * 2^frac(t)
//     is this design's choice.
//  2. The value table LUT_v (16 entries) is read at the top 4 bits of pos and
//     at the next entry (past the last entry, the last segment's slope is
//     continued), and linearly interpolated with the remaining bits.
//  3. The error table LUT_e (256 entries) holds the residual f - LUT_v(interp)
//     and is read and interpolated the same way at the top 8 bits of pos.
//  4. Accumulation & alignment: LUT_v * 2^ESH + LUT_e, scaled by
//     2^(tbl_exp + oe), is normalised into FI32.
// Table values are signed 24-bit: LUT_v in units of 2^(tbl_exp-22) and LUT_e
// in units of 2^(tbl_exp-22-ESH). The last segment of each table uses the
// slope of the segment before it. The tables are written through the load port, eight entries
// per write from one memory word (entry 8*ld_widx+l in bits 32l+23:32l;
// entries 0..15 LUT_v, 16..271 LUT_e), with the contents the software
// computes for the function in use; table sizes 16/256 follow the paper, entry
// width, ESH and K are this design's. Lookups are combinational.
module trigen_lut
  import trigen_pkg::*;
#(
  parameter int LANES = VEC,
  parameter int NV    = 16,
  parameter int NE    = 256,
  parameter int K     = 2,
  parameter int ESH   = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ld_we,
  input  logic [5:0]        ld_widx,
  input  logic [255:0]      ld_word,
  input  logic signed [7:0] ld_tbl_exp,
  input  logic              ld_exp_we,
  input  lut_flags_t        func,
  input  fi32_t             x [LANES],
  output fi32_t             y [LANES]
);
  localparam int POS_W = 20;
  localparam int VB = $clog2(NV);
  localparam int EB = $clog2(NE);
  localparam logic signed [31:0] LOG2E_Q24 = 32'sd24204406; // log2(e) * 2^24

  logic signed [23:0] tv [NV];
  logic signed [23:0] te [NE];
  logic signed [7:0]  tbl_exp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NV; i++) tv[i] <= '0;
      for (int i = 0; i < NE; i++) te[i] <= '0;
      tbl_exp <= '0;
    end else begin
      for (int l = 0; l < 8; l++) begin
        if (ld_we && 8*int'(ld_widx) + l < NV) tv[VB'(8*int'(ld_widx) + l)] <= ld_word[32*l +: 24];
        else if (ld_we && 8*int'(ld_widx) + l < NV + NE) te[EB'(8*int'(ld_widx) + l - NV)] <= ld_word[32*l +: 24];
      end
      if (ld_exp_we) tbl_exp <= ld_tbl_exp;
    end
  end

  function automatic fi32_t lookup(input fi32_t xi, input lut_flags_t f,
                                   input logic signed [23:0] v_tab [NV],
                                   input logic signed [23:0] e_tab [NE],
                                   input logic signed [7:0] texp);
    logic [23:0] a;
    logic [21:0] mf;
    int p, ex, oe;
    logic neg, zero_out, sat_out;
    logic [POS_W-1:0] pos;
    logic signed [63:0] xf, t, yv, ye, ytot;
    logic signed [63:0] dv, de;
    logic [VB-1:0] iv;
    logic [EB-1:0] ie;
    fi32_t res;
    a   = xi.frac[23] ? 24'(-xi.frac) : 24'(xi.frac);
    neg = xi.frac[23];
    p = -1;
    for (int i = 0; i < 24; i++) if (a[i]) p = i;
    zero_out = 1'b0; sat_out = 1'b0;
    pos = '0; oe = 0; mf = '0; ex = 0; xf = '0;
    if (p < 0) begin
      // x == 0
      if (f.ex) begin pos = '0; oe = 0; end
      else if (f.inv) sat_out = 1'b1;
      else zero_out = 1'b1;
    end else begin
      mf = 22'((64'(a) << (23 - p)) >> 1);          // bits below the leading one
      ex = p + int'(xi.exp) - 149;                  // x = 2^ex * 1.mf
      // x as Q24 fixed point (saturated for |x| >= 2^30)
      if (ex >= 30) xf = neg ? -(64'sd1 <<< 54) : (64'sd1 <<< 54);
      else if (int'(xi.exp) - 149 + 24 >= 0) xf = 64'(xi.frac) <<< (int'(xi.exp) - 125);
      else if (int'(xi.exp) - 125 < -62) xf = neg ? -64'sd1 : 64'sd0;
      else xf = 64'(xi.frac) >>> (125 - int'(xi.exp));
      if (f.rlu) begin
        if (ex <= K) begin
          pos = POS_W'((xf + (64'sd1 <<< (K + 1 + 24))) >>> (24 + K + 2 - POS_W));
          oe  = 0;
        end else if (!neg) begin
          pos = POS_W'(((64'(mf) + (64'sd1 <<< 22)) + (64'sd1 <<< 23)) >>> (24 - POS_W));
          oe  = ex - K;
        end else zero_out = 1'b1;
      end else if (f.ex) begin
        t  = (xf * 64'(LOG2E_Q24)) >>> 24;            // Q24
        if ((t >>> 24) < -64'sd160) zero_out = 1'b1;
        else if ((t >>> 24) > 64'sd160) sat_out = 1'b1;
        oe  = int'(t >>> 24);
        pos = t[23:24-POS_W];
      end else if (f.sqr) begin
        // odd exponents first for 1/sqrt, last for sqrt: the table is then
        // continuous across its two halves
        pos = {ex[0] ^ f.inv, mf[21 -: POS_W-1]};
        oe  = f.inv ? -((ex + 1) >>> 1) : (ex >>> 1);
      end else begin
        pos = mf[21 -: POS_W];
        oe  = -ex;
      end
    end
    // slope of the segment; the last segment continues the one before it
    iv  = pos[POS_W-1 -: VB];
    ie  = pos[POS_W-1 -: EB];
    dv  = (iv == VB'(NV-1)) ? 64'(v_tab[iv]) - 64'(v_tab[iv - 1'b1]) : 64'(v_tab[iv + 1'b1]) - 64'(v_tab[iv]);
    de  = (ie == EB'(NE-1)) ? 64'(e_tab[ie]) - 64'(e_tab[ie - 1'b1]) : 64'(e_tab[ie + 1'b1]) - 64'(e_tab[ie]);
    yv = 64'(v_tab[iv]) + ((dv * $signed(64'(pos[POS_W-VB-1:0]))) >>> (POS_W-VB));
    ye = 64'(e_tab[ie]) + ((de * $signed(64'(pos[POS_W-EB-1:0]))) >>> (POS_W-EB));
    ytot = (yv <<< ESH) + ye;
    if (f.inv && !f.sqr && neg) ytot = -ytot;      // reciprocal is odd
    res = fi32_norm(ytot, 149 - 22 - ESH + int'(texp) + oe);
    if (zero_out) res = '0;
    if (sat_out) begin res.exp = 8'd255; res.frac = 24'sh7fffff; end
    return res;
  endfunction

  always_comb begin
    for (int l = 0; l < LANES; l++) y[l] = lookup(x[l], func, tv, te, tbl_exp);
  end
endmodule

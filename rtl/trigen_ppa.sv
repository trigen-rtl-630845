// trigen_ppa: post-processing array (PPA) of a DLA core.
//
// Processes one row of N FI32 values per cycle, in the order of the paper's PPA
// figure: ADD (bias, PSUM or an elementwise addend), Rescale (channel-wise
// CWQ scale, an elementwise factor or a per-row scale), then the LUT for a
// nonlinear function, then output formatting:
//   FI32  : the normalised values (y)
//   MX8   : alignment to the row's largest exponent, a shared exponent E and
//           32 rounded, saturated INT8 elements (value q * 2^(E-127))
//   INT8 / UINT8 : rounding to integer, zero-point addition, saturation
// The row sum of the processed values (red) serves the MEAN and MEAN_SQUARE
// instructions. Each stage is bypassed when its enable is low, which is how
// the same hardware runs TMATMUL post-processing and the elementwise MUL, ADD
// and RESCALE instructions. One pipeline register: outputs appear the cycle
// after in_valid, with out_valid, and hold until the next row.
// The MX rounding (round half up) and the choice E = max exponent - 6 are
// this design's; the paper names the alignment step only.
module trigen_ppa
  import trigen_pkg::*;
#(
  parameter int N = VEC
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  fi32_t             x    [N],
  input  fi32_t             addv [N],
  input  fi32_t             mulv [N],
  input  logic              add_en,
  input  logic              mul_en,
  input  logic              lut_en,
  input  lut_flags_t        func,
  input  dtype_e            out_t,
  input  logic [7:0]        zp,
  // LUT table load
  input  logic              ld_we,
  input  logic [5:0]        ld_widx,
  input  logic [255:0]      ld_word,
  input  logic signed [7:0] ld_tbl_exp,
  input  logic              ld_exp_we,
  output logic              out_valid,
  output fi32_t             y    [N],
  output fi32_t             red,
  output word_t             out_word
);
  fi32_t s_add [N], s_mul [N], s_lut [N], s_out [N];
  fi32_t sum_c;
  word_t w_c;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      s_add[i] = add_en ? fi32_add(x[i], addv[i]) : x[i];
      s_mul[i] = mul_en ? fi32_mul(s_add[i], mulv[i]) : s_add[i];
    end
  end

  trigen_lut #(.LANES(N)) u_lut (
    .clk, .rst_n, .ld_we, .ld_widx, .ld_word, .ld_tbl_exp, .ld_exp_we,
    .func, .x(s_mul), .y(s_lut));

  always_comb begin
    for (int i = 0; i < N; i++) s_out[i] = lut_en ? s_lut[i] : s_mul[i];
    sum_c = '0;
    for (int i = 0; i < N; i++) sum_c = fi32_add(sum_c, s_out[i]);
  end

  // output formatting to one memory word (MX8 / INT8 / UINT8)
  always_comb begin
    int emax, es, sh;
    logic signed [63:0] q;
    w_c  = '0;
    emax = 0;
    for (int i = 0; i < N; i++)
      if (s_out[i].frac != 0 && int'(s_out[i].exp) > emax) emax = int'(s_out[i].exp);
    es = (emax > 6) ? emax - 6 : 0;
    if (out_t == DT_MX8) w_c[263:256] = 8'(es);
    else                 w_c[263:256] = 8'd127;
    for (int i = 0; i < N; i++) begin
      if (out_t == DT_MX8) sh = 22 + es - int'(s_out[i].exp);
      else                 sh = 149 - int'(s_out[i].exp);
      if (s_out[i].frac == 0) q = '0;
      else if (sh > 40) q = '0;
      else if (sh <= 0) q = s_out[i].frac[23] ? -64'sd100000 : 64'sd100000;
      else q = (64'(s_out[i].frac) + (64'sd1 <<< (sh - 1))) >>> sh;
      if (out_t == DT_UINT8) begin
        q = q + 64'(zp);
        if (q < 0) q = 0;
        if (q > 255) q = 255;
      end else begin
        if (out_t == DT_INT8) q = q + 64'($signed(zp));
        if (q < -128) q = -128;
        if (q > 127) q = 127;
      end
      w_c[8*i +: 8] = q[7:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      red       <= '0;
      out_word  <= '0;
      for (int i = 0; i < N; i++) y[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        y        <= s_out;
        red      <= sum_c;
        out_word <= w_c;
      end
    end
  end
endmodule

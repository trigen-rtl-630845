// tb_util_pkg: reference arithmetic shared by the testbenches.
//
// FI32 <-> real conversion done with real arithmetic (independent of the
// integer helpers of the design), the LUT table contents for each nonlinear
// function, and real-valued reference models of those functions.
package tb_util_pkg;
  import trigen_pkg::*;

  typedef enum int {F_INV, F_ISQR, F_SQR, F_EXP, F_SILU} tfunc_e;

  function automatic real p2(input int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fi32_r(input fi32_t v);
    return $itor(v.frac) * p2(int'(v.exp) - 149);
  endfunction

  function automatic fi32_t r_fi32(input real x);
    fi32_t o;
    real a;
    int e;
    if (x == 0.0) return '0;
    a = (x < 0.0) ? -x : x;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    o.exp  = 8'(e + 127);
    o.frac = 24'($rtoi(a * 4194304.0));
    if (x < 0.0) o.frac = -o.frac;
    return o;
  endfunction

  function automatic bit close(input real got, input real exp_v, input real rel, input real abs_t);
    real d;
    d = got - exp_v;
    if (d < 0.0) d = -d;
    return (d <= abs_t) || (d <= rel * ((exp_v < 0.0) ? -exp_v : exp_v));
  endfunction

  function automatic real silu(input real x);
    return x / (1.0 + $exp(-x));
  endfunction

  function automatic lut_flags_t flags_of(input tfunc_e f);
    lut_flags_t l;
    l = '0;
    case (f)
      F_INV:  l.inv = 1'b1;
      F_ISQR: begin l.inv = 1'b1; l.sqr = 1'b1; end
      F_SQR:  l.sqr = 1'b1;
      F_EXP:  l.ex = 1'b1;
      default: l.rlu = 1'b1;
    endcase
    return l;
  endfunction

  function automatic int tbl_exp_of(input tfunc_e f);
    return (f == F_SQR) ? 1 : (f == F_SILU) ? 3 : 0;
  endfunction

  // function value at table position pos in [0,1)
  function automatic real tab_f(input tfunc_e f, input real pos);
    real m;
    case (f)
      F_INV:  return 1.0 / (1.0 + pos);
      F_ISQR: begin
        if (pos < 0.5) return 1.0 / $sqrt((1.0 + 2.0 * pos) / 2.0);
        m = 1.0 + 2.0 * (pos - 0.5); return 1.0 / $sqrt(m);
      end
      F_SQR: begin
        if (pos < 0.5) return $sqrt(1.0 + 2.0 * pos);
        m = 1.0 + 2.0 * (pos - 0.5); return $sqrt(2.0 * m);
      end
      F_EXP:  return $exp(pos * 0.6931471805599453);
      default: return silu(pos * 16.0 - 8.0);
    endcase
  endfunction

  // 34 words of table data (LUT_v entries 0..15, LUT_e entries 16..271),
  // eight 24-bit entries per word in 32-bit lanes.
  // LUT_v[i] = round(f(i/16) * 2^(22-t)),
  // LUT_e[j] = round(f(j/256) * 2^(26-t)) - 16 * interp_v(j/256).
  function automatic void make_tables(input tfunc_e f, output word_t w [34]);
    int tv [16];
    int te [256];
    int t, i, fv, d, yv;
    t = tbl_exp_of(f);
    for (int k = 0; k < 16; k++) tv[k] = $rtoi($floor(tab_f(f, k / 16.0) * p2(22 - t) + 0.5));
    for (int j = 0; j < 256; j++) begin
      i  = j / 16;
      fv = (j % 16) * 4096;
      d  = (i == 15) ? tv[15] - tv[14] : tv[i+1] - tv[i];
      yv = tv[i] + int'((longint'(d) * longint'(fv)) >>> 16);
      te[j] = $rtoi($floor(tab_f(f, j / 256.0) * p2(26 - t) + 0.5)) - 16 * yv;
    end
    for (int k = 0; k < 34; k++) begin
      w[k] = '0;
      for (int l = 0; l < 8; l++)
        if (8*k + l < 16) w[k][32*l +: 24] = 24'(tv[8*k + l]);
        else w[k][32*l +: 24] = 24'(te[8*k + l - 16]);
    end
  endfunction

  function automatic real ref_f(input tfunc_e f, input real x);
    case (f)
      F_INV:  return 1.0 / x;
      F_ISQR: return 1.0 / $sqrt(x);
      F_SQR:  return $sqrt(x);
      F_EXP:  return $exp(x);
      default: begin
        // the paper's SiLU decomposition with K = 2: for x = 2^e * m with
        // e > K, SiLU(x) is taken as 2^(e-K) * SiLU(2^K * m)
        real m;
        int e;
        if (x < 8.0) return silu(x);
        m = x; e = 0;
        while (m >= 2.0) begin m = m / 2.0; e++; end
        return p2(e - 2) * silu(4.0 * m);
      end
    endcase
  endfunction
endpackage

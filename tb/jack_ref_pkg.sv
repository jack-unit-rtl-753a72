// jack_ref_pkg: behavioural reference model of the Jack unit for the
// testbenches. It works on element values with plain integer arithmetic and
// loops, independent of the RTL's structure: products are formed from nibble
// values, aligned by floor division, summed, then normalised by a bit scan.
// jack_real gives the exact real-valued dot product for a tolerance check.
package jack_ref_pkg;
  import jack_pkg::*;

  typedef struct {
    jack_mode_e mode;
    bit         int_signed;
    bit [7:0]   xs [16];     // significand or integer element (4 or 8 bits used)
    bit [7:0]   ws [16];
    bit [7:0]   ex [16];     // element exponents (4 or 8 bits used)
    bit [7:0]   ew [16];
    bit         sx [16];     // element signs (FP modes)
    bit         sw [16];
    bit [7:0]   shx, shw;    // MX shared exponents
  } op_t;

  typedef struct {
    bit [15:0] data;
    bit        is_int;
    bit        sat;
    bit        flush;
    longint    sum;          // CSM sum
    int        emax;
    int        max_shift;    // largest alignment shift used
    int        lead;         // leading-one position of |sum|
    int        frac;
  } res_t;

  function automatic int nib(bit [3:0] n, bit s);
    return (s && n[3]) ? int'(n) - 16 : int'(n);
  endfunction

  function automatic longint floor_shift(longint v, int sh);
    longint d = longint'(1) << sh;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  function automatic int n_of(jack_mode_e m);
    return mode_is_wide(m) ? 4 : 16;
  endfunction

  function automatic int bias_of(op_t op);
    int b;
    case (op.mode)
      MODE_BF16:  b = -127;
      MODE_FP8:   b = 113;
      MODE_MXFP8: begin
        b = int'(op.shx) + int'(op.shw) - 141;
        if (b > 255) b = 255;
        if (b < -256) b = -256;
      end
      default:    b = -127;
    endcase
    return b;
  endfunction

  // product exponent of lane i (FP modes)
  function automatic int pexp(op_t op, int i);
    int xe = mode_is_wide(op.mode) ? int'(op.ex[i]) : int'(op.ex[i][3:0]);
    int we = mode_is_wide(op.mode) ? int'(op.ew[i]) : int'(op.ew[i][3:0]);
    return xe + we + bias_of(op);
  endfunction

  // one aligned, signed product
  function automatic longint prod_term(op_t op, int i, int sh, bit neg);
    longint t = 0;
    bit s = !mode_is_fp(op.mode) && op.int_signed;
    if (mode_is_wide(op.mode)) begin
      for (int a = 0; a < 2; a++)
        for (int b = 0; b < 2; b++)
          t += floor_shift(longint'(nib(op.xs[i][4*a +: 4], s && a == 1) *
                                    nib(op.ws[i][4*b +: 4], s && b == 1)), sh) << (4*a + 4*b);
    end else begin
      t = floor_shift(longint'(nib(op.xs[i][3:0], s) * nib(op.ws[i][3:0], s)), sh);
    end
    return neg ? -t : t;
  endfunction

  function automatic res_t jack_ref(op_t op);
    res_t r;
    int n = n_of(op.mode);
    int pe [16];
    int sh;
    longint m;
    int e;
    r = '{default: 0};
    r.is_int = mode_is_int(op.mode);
    r.frac = (op.mode == MODE_BF16) ? 14 : mode_is_fp(op.mode) ? 6 : 0;
    r.emax = 0;
    if (mode_is_fp(op.mode)) begin
      r.emax = -100000;
      for (int i = 0; i < n; i++) begin
        pe[i] = pexp(op, i);
        if (pe[i] > r.emax) r.emax = pe[i];
      end
    end else if (mode_is_mx(op.mode)) begin
      r.emax = int'(op.shx) + int'(op.shw) - 127;
    end
    r.sum = 0;
    for (int i = 0; i < n; i++) begin
      sh = mode_is_fp(op.mode) ? r.emax - pe[i] : 0;
      if (sh > 15) sh = 15;
      if (sh > r.max_shift) r.max_shift = sh;
      r.sum += prod_term(op, i, sh, mode_is_fp(op.mode) && (op.sx[i] != op.sw[i]));
    end
    if (r.is_int) begin
      if (r.sum > 32767)       begin r.data = 16'h7FFF; r.sat = 1; end
      else if (r.sum < -32768) begin r.data = 16'h8000; r.sat = 1; end
      else                     r.data = 16'(r.sum);
      return r;
    end
    m = (r.sum < 0) ? -r.sum : r.sum;
    if (m == 0) begin r.data = 16'h0000; return r; end
    r.lead = 0;
    for (int i = 0; i < 40; i++) if (m[i]) r.lead = i;
    e = r.emax + r.lead - r.frac;
    if (e >= 255)     begin r.data = {r.sum < 0, 15'h7F7F}; r.sat = 1; end
    else if (e <= 0)  begin r.data = {r.sum < 0, 15'h0000}; r.flush = 1; end
    else begin
      // 7 bits after the leading one, truncated
      r.data = {r.sum < 0, 8'(e), 7'((r.lead >= 7) ? (m >> (r.lead - 7)) : (m << (7 - r.lead)))};
    end
    return r;
  endfunction

  function automatic real pow2(int e);
    real v = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) v = v * 2.0;
    else        for (int i = 0; i < -e; i++) v = v / 2.0;
    return v;
  endfunction

  // exact value of the dot product (FP and MX modes), and of a 16-bit result
  function automatic real jack_real(op_t op);
    real acc = 0.0, xv, wv;
    int n = n_of(op.mode);
    bit s = op.int_signed;
    for (int i = 0; i < n; i++) begin
      if (op.mode == MODE_BF16) begin
        xv = real'(op.xs[i]) / 128.0 * (pow2(int'(op.ex[i]) - 127));
        wv = real'(op.ws[i]) / 128.0 * (pow2(int'(op.ew[i]) - 127));
      end else if (mode_is_fp(op.mode)) begin
        xv = real'(op.xs[i][3:0]) / 8.0 * (pow2(int'(op.ex[i][3:0]) - 7));
        wv = real'(op.ws[i][3:0]) / 8.0 * (pow2(int'(op.ew[i][3:0]) - 7));
      end else if (op.mode == MODE_MXINT8 || op.mode == MODE_INT8) begin
        xv = real'((s && op.xs[i][7]) ? int'(op.xs[i]) - 256 : int'(op.xs[i]));
        wv = real'((s && op.ws[i][7]) ? int'(op.ws[i]) - 256 : int'(op.ws[i]));
      end else begin
        xv = real'(nib(op.xs[i][3:0], s));
        wv = real'(nib(op.ws[i][3:0], s));
      end
      if (mode_is_fp(op.mode) && (op.sx[i] != op.sw[i])) xv = -xv;
      acc += xv * wv;
    end
    if (mode_is_mx(op.mode))
      acc = acc * (pow2(int'(op.shx) - 127)) * (pow2(int'(op.shw) - 127));
    return acc;
  endfunction

  function automatic real bf16_real(bit [15:0] w);
    real v;
    if (w[14:7] == 0) return 0.0;
    v = (1.0 + real'(w[6:0]) / 128.0) * (pow2(int'(w[14:7]) - 127));
    return w[15] ? -v : v;
  endfunction
endpackage

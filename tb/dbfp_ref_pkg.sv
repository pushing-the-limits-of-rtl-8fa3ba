// dbfp_ref_pkg: reference model of the DBFP Softmax engine for the
// testbenches, written with real arithmetic, sorting and plain loops rather
// than with the circuits of the RTL.
//
// It reproduces every rounding step of the engine so results can be
// compared bit for bit, and it also provides the floating-point Softmax
// against which the engine's accuracy is measured. lut_value() defines the
// contents of the DH-LUT sub-tables held in system memory:
//   value(code, q) = min(2^10 - 1, round(exp(-q * 2^(code - 32)) * 2^10)).
package dbfp_ref_pkg;

  localparam int K     = 7;
  localparam int VALW  = 10;
  localparam int HR    = 0;

  function automatic real fp16_to_real(input logic [15:0] x);
    int  e;
    real m;
    e = int'(x[14:10]);
    m = (e == 0) ? real'(x[9:0]) / 1024.0 : 1.0 + real'(x[9:0]) / 1024.0;
    if (e == 0) e = 1;
    return (x[15] ? -1.0 : 1.0) * m * (2.0 ** (e - 15));
  endfunction

  function automatic int eff_exp(input logic [15:0] x);
    return (x[14:10] == 0) ? 1 : int'(x[14:10]);
  endfunction

  // Random FP16 with exponent field in [elo, ehi] and random sign.
  function automatic logic [15:0] rand_fp16(input int elo, input int ehi, input bit neg_only);
    logic [15:0] r;
    r[15]    = neg_only ? 1'b1 : 1'($urandom_range(0, 1));
    r[14:10] = 5'($urandom_range(elo, ehi));
    r[9:0]   = 10'($urandom);
    return r;
  endfunction

  // Nearest FP16 of a real value (normal range; tiny values become zero).
  function automatic logic [15:0] real_to_fp16(input real v);
    real a;
    int  e, f;
    a = (v < 0.0) ? -v : v;
    if (a < 2.0 ** (-14)) return {v < 0.0, 15'd0};
    e = 0;
    while (a >= 2.0 ** (e + 1)) e++;
    while (a < 2.0 ** e) e--;
    f = int'($floor((a / (2.0 ** e) - 1.0) * 1024.0 + 0.5));
    if (f == 1024) begin f = 0; e++; end
    if (e > 15) begin e = 15; f = 1023; end
    return {v < 0.0, 5'(e + 15), 10'(f)};
  endfunction

  function automatic int lut_value(input int code, input int q);
    real v;
    int  r;
    v = $exp(-real'(q) * (2.0 ** (code - 32))) * 1024.0;
    r = int'($floor(v + 0.5));
    return (r > 1023) ? 1023 : r;
  endfunction

  function automatic int floor_log2(input longint v);
    int r;
    r = 0;
    while (v > 1) begin v = v / 2; r++; end
    return r;
  endfunction

  // Max stage: index of the maximum (by value) and largest exponent.
  function automatic void ref_max(input logic [15:0] x[], output logic [15:0] xmax, output int emax);
    real best;
    best = fp16_to_real(x[0]); xmax = x[0]; emax = 0;
    foreach (x[i]) begin
      if (fp16_to_real(x[i]) > best) begin best = fp16_to_real(x[i]); xmax = x[i]; end
      if (eff_exp(x[i]) > emax) emax = eff_exp(x[i]);
    end
  endfunction

  // SEU: signed aligned mantissa, round half up on the magnitude.
  function automatic int ref_align(input logic [15:0] x, input int emax);
    real mag;
    int  m;
    mag = (fp16_to_real(x) < 0.0 ? -fp16_to_real(x) : fp16_to_real(x)) * (2.0 ** (25 - emax));
    m   = int'($floor(mag + 0.5));
    return x[15] ? -m : m;
  endfunction

  // DBFP SUB: indices, sub-LUT code and saturation count.
  function automatic void ref_sub(input int p[], input int pmax, input int emax,
                                  output int q[], output int code, output int nsat);
    int n, d[], ed[], piv, sh;
    n = p.size();
    d = new[n]; ed = new[n]; q = new[n];
    foreach (p[i]) begin
      d[i]  = (pmax - p[i] < 0) ? 0 : pmax - p[i];
      ed[i] = (d[i] == 0) ? 0 : floor_log2(d[i]);
    end
    ed.sort();
    piv  = ed[(n + 1) / 2 - 1];
    sh   = piv + HR + 1 - K;
    nsat = 0;
    foreach (d[i]) begin
      real v;
      v    = real'(d[i]) * (2.0 ** (-sh));
      q[i] = int'($floor(v + 0.5));
      if (q[i] > (1 << K) - 1) begin q[i] = (1 << K) - 1; nsat++; end
    end
    code = emax - 25 + sh + 32;
  endfunction

  // DBFP DIV: out = round(num * rcp / 2^11), exponent -floor(log2 sum).
  function automatic void ref_div(input int num[], input longint sum,
                                  output int mant[], output int oexp);
    int es, j, r;
    real ms;
    es = floor_log2(sum);
    ms = real'(sum) / (2.0 ** es);
    j  = int'($floor((ms - 1.0) * 256.0));
    r  = int'($floor(2048.0 / (1.0 + (real'(j) + 0.5) / 256.0) + 0.5));
    mant = new[num.size()];
    foreach (num[i]) begin
      mant[i] = int'($floor(real'(num[i]) * real'(r) / 2048.0 + 0.5));
      if (mant[i] > 1023) mant[i] = 1023;
    end
    oexp = -es;
  endfunction

  // Whole engine.
  function automatic void ref_engine(input logic [15:0] x[], output int mant[], output int oexp,
                                     output int code, output int nsat);
    logic [15:0] xmax;
    int emax, p[], pmax, q[], num[];
    longint sum;
    ref_max(x, xmax, emax);
    p = new[x.size()];
    foreach (x[i]) p[i] = ref_align(x[i], emax);
    pmax = ref_align(xmax, emax);
    ref_sub(p, pmax, emax, q, code, nsat);
    num = new[x.size()];
    sum = 0;
    foreach (q[i]) begin num[i] = lut_value(code, q[i]); sum += num[i]; end
    ref_div(num, sum, mant, oexp);
  endfunction

  // Floating-point Softmax, for accuracy figures.
  function automatic void float_softmax(input logic [15:0] x[], output real y[]);
    real mx, s;
    y  = new[x.size()];
    mx = fp16_to_real(x[0]);
    foreach (x[i]) if (fp16_to_real(x[i]) > mx) mx = fp16_to_real(x[i]);
    s = 0.0;
    foreach (x[i]) begin y[i] = $exp(fp16_to_real(x[i]) - mx); s += y[i]; end
    foreach (y[i]) y[i] = y[i] / s;
  endfunction

endpackage

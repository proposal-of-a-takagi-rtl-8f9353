// tb_fuzzy_ref.svh: real-valued reference model of the Takagi-Sugeno
// inference, included inside testbench modules.
//
// Stated here independently of the RTL: seven membership functions on
// [-1, 1] (LN right trapezoid 1..-0.75..-0.5, triangles peaking at -0.5,
// -0.25, 0, 0.25, 0.5 with half-width 0.25, LP left trapezoid 0.5..0.75..1),
// 49 rules g = l*7 + k with AND = min, consequents
//   A_l = 0.5 - |l-3|/16,  B_k = 0.25 + |k-3|/32,  C_lk = (l+k-6)/64,
// and weighted-mean defuzzification.

function automatic real ref_abs(real v);
  return (v < 0.0) ? -v : v;
endfunction

function automatic real ref_mu(int j, real x);
  real m, up, dn;
  if (j == 0) begin
    if (x < -0.75)     return 1.0;
    else if (x > -0.5) return 0.0;
    else               return (-0.5 - x) / 0.25;
  end else if (j == 6) begin
    if (x > 0.75)      return 1.0;
    else if (x < 0.5)  return 0.0;
    else               return (x - 0.5) / 0.25;
  end else begin
    m  = -0.75 + 0.25 * j;
    up = (x - (m - 0.25)) / 0.25;
    dn = ((m + 0.25) - x) / 0.25;
    if (x < m) return (up < 0.0) ? 0.0 : up;
    else       return (dn < 0.0) ? 0.0 : dn;
  end
endfunction

function automatic real ref_a(int l);        return 0.5 - ref_abs(real'(l - 3)) / 16.0; endfunction
function automatic real ref_b(int k);        return 0.25 + ref_abs(real'(k - 3)) / 32.0; endfunction
function automatic real ref_c(int l, int k); return real'(l + k - 6) / 64.0; endfunction

function automatic real ref_min(real a, real b);
  return (a < b) ? a : b;
endfunction

function automatic real ref_ts(real x0, real x1);
  real num, den, o;
  num = 0.0;
  den = 0.0;
  for (int l = 0; l < 7; l++) begin
    for (int k = 0; k < 7; k++) begin
      o   = ref_min(ref_mu(l, x0), ref_mu(k, x1));
      num += o * (ref_a(l) * x0 + ref_b(k) * x1 + ref_c(l, k));
      den += o;
    end
  end
  return (den > 0.0) ? num / den : 0.0;
endfunction

// Decode an IEEE-754 single (normal or zero) into a real.
function automatic real ref_f32(logic [31:0] f);
  real m;
  int  e;
  if (f[30:23] == 8'd0) return 0.0;
  m = 1.0 + real'(f[22:0]) / 8388608.0;
  e = int'(f[30:23]) - 127;
  m = m * (2.0 ** e);
  return f[31] ? -m : m;
endfunction

// Expected float32 bits of a real value, significand truncated.
function automatic logic [31:0] ref_f32_trunc(real v);
  real a, m;
  int  e;
  logic s;
  if (v == 0.0) return 32'd0;
  s = (v < 0.0);
  a = s ? -v : v;
  e = 0;
  while (a >= 2.0 ** (e + 1)) e++;
  while (a < 2.0 ** e) e--;
  m = a / (2.0 ** e) - 1.0;
  return {s, 8'(e + 127), 23'($floor(m * 8388608.0))};
endfunction

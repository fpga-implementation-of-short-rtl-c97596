// tb_dct_ref_pkg: reference models for the testbenches of the CORDIC-based
// DCT. They work on plain 32-bit integers and compute the shifted terms by
// integer division rounded toward minus infinity, which is what an arithmetic
// right shift of a two's-complement word does; the RTL uses shifts on W-bit
// words, so the two are written independently. Also holds the exact DCT basis
// (cosines) and the expected gains of the unscaled outputs.
package tb_dct_ref_pkg;

  // floor(v / 2^s)
  function automatic int fdiv(int v, int s);
    int d = 1 << s;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  // 1 when floor(v / 2^s) dropped nonzero bits
  function automatic bit drops(int v, int s);
    return (fdiv(v, s) * (1 << s)) != v;
  endfunction

  // one microrotation, u = x and l = y of the CORDIC recurrence
  function automatic void micro(inout int u, inout int l, input int s, input int sg);
    int nu, nl;
    nu = u - sg * fdiv(l, s);
    nl = l + sg * fdiv(u, s);
    u = nu;
    l = nl;
  endfunction

  // cascade of n microrotations
  function automatic void rotate(inout int u, inout int l, input int n,
                                 input int sh [3], input int sg [3]);
    for (int k = 0; k < n; k++) micro(u, l, sh[k], sg[k]);
  endfunction

  parameter int ALPHA_SH [3] = '{1, 4, 0};
  parameter int ALPHA_SG [3] = '{-1, 1, 0};
  parameter int BETA_SH  [3] = '{1, 2, 4};
  parameter int BETA_SG  [3] = '{-1, 1, 1};
  parameter int GAMMA_SH [3] = '{1, 2, 4};
  parameter int GAMMA_SG [3] = '{-1, -1, 1};

  // bit-exact model of the whole transform; trunc counts shifted operands
  // that lost nonzero bits, x5_neg is what X5 would be with a true negation
  function automatic void dct8(input int x [8], output int y [8], output int trunc,
                               output int x5_neg);
    int a [8];
    int b0, b1, b2, b3, u, l, bu, bl, gu, gl, m2, m3;
    trunc = 0;
    for (int k = 0; k < 4; k++) begin
      a[k]   = x[k] + x[7-k];
      a[7-k] = x[k] - x[7-k];
    end
    b0 = a[0] + a[3]; b3 = a[0] - a[3];
    b1 = a[1] + a[2]; b2 = a[1] - a[2];
    y[0] = b0 + b1;
    y[4] = b0 - b1;
    u = b3; l = b2;
    for (int k = 0; k < 2; k++) begin
      trunc += drops(u, ALPHA_SH[k]) + drops(l, ALPHA_SH[k]);
      micro(u, l, ALPHA_SH[k], ALPHA_SG[k]);
    end
    y[2] = u; y[6] = l;
    bu = a[7]; bl = a[4];
    for (int k = 0; k < 3; k++) begin
      trunc += drops(bu, BETA_SH[k]) + drops(bl, BETA_SH[k]);
      micro(bu, bl, BETA_SH[k], BETA_SG[k]);
    end
    gu = a[6]; gl = a[5];
    for (int k = 0; k < 3; k++) begin
      trunc += drops(gu, GAMMA_SH[k]) + drops(gl, GAMMA_SH[k]);
      micro(gu, gl, GAMMA_SH[k], GAMMA_SG[k]);
    end
    m2 = bu - gu;
    m3 = bl + gl;
    y[1] = bu + gu;
    y[7] = gl - bl;
    y[3] = m2 - m3;
    x5_neg = m2 + m3;
    y[5] = m2 + m3 + 1;   // the uncompensated LSB of the inverted negation
  endfunction

  // DCT-II basis without normalisation: sum_n x[n] cos((2n+1) k pi / 16)
  function automatic real dct_ref(input int x [8], input int k);
    real s = 0.0;
    for (int n = 0; n < 8; n++) s += x[n] * $cos((2*n + 1) * k * 3.14159265358979 / 16.0);
    return s;
  endfunction

  function automatic real cordic_gain(input int n, input int sh [3]);
    real g = 1.0;
    for (int k = 0; k < n; k++) g *= $sqrt(1.0 + 2.0 ** (-2.0 * sh[k]));
    return g;
  endfunction

  // expected ratio X[k] / dct_ref(x, k) of the unscaled outputs
  function automatic real out_gain(input int k);
    real ka = cordic_gain(2, ALPHA_SH);
    real kb = cordic_gain(3, BETA_SH);
    case (k)
      0: return 1.0;
      4: return $sqrt(2.0);
      2: return ka;
      6: return -ka;
      1, 7: return kb;
      default: return $sqrt(2.0) * kb;   // 3, 5
    endcase
  endfunction

endpackage

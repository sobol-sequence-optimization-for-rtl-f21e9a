// hdc_tb_pkg: reference models shared by the testbenches of the Sobol-based
// HDC classifier. They are written from the definitions (Sobol recurrence,
// threshold rule, rotate-and-XOR n-grams, majority vote, SCC formula) with
// plain integer arithmetic, independently of the RTL.
package hdc_tb_pkg;
  import hdc_pkg::*;

  // T = 0.38 for D = 8192: ceil(0.38 * 8192) = ceil(3112.96) = 3113
  localparam int unsigned T_CODE_DEF  = 3113;

  // Sobol dimensions (1-based, MATLAB numbering) selected for D = 8192 and
  // T = 0.38, one per symbol. The descriptors of these dimensions are loaded
  // into the encoder at run time; the list is kept here for reference.
  localparam int unsigned SOBOL_IDX_D8192 [NUM_SYMBOLS] = '{
    2, 5, 12, 15, 23, 36, 48, 51, 53, 54, 63, 73, 66, 79,
    97, 115, 88, 98, 104, 109, 159, 148, 147, 123, 126, 130, 188, 172
  };

  // Point i of a Sobol dimension, as an integer code of sb fraction bits.
  function automatic int unsigned ref_sobol_point(sobol_desc_t d, int unsigned i, int sb);
    int unsigned m [1:32];
    int unsigned x;
    int s;
    s = (d.s == 0) ? 1 : int'(d.s);
    for (int k = 1; k <= sb; k++) begin
      if (k <= s) m[k] = d.m[k-1];
      else begin
        // m_k = 2 a_1 m_{k-1} ^ ... ^ 2^{s-1} a_{s-1} m_{k-s+1} ^ 2^s m_{k-s} ^ m_{k-s}
        m[k] = (m[k-s] * (1 << s)) ^ m[k-s];
        for (int j = 1; j <= s - 1; j++) begin
          int unsigned aj;
          aj = (d.a >> (s - 1 - j)) & 1;      // a_1 is the leading coefficient bit
          if (aj != 0) m[k] = m[k] ^ (m[k-j] * (1 << j));
        end
      end
      m[k] = m[k] & ((1 << sb) - 1);
    end
    x = 0;
    for (int k = 1; k <= sb; k++)
      if ((i >> (k - 1)) & 1) x = x ^ (m[k] * (1 << (sb - k)));
    return x & ((1 << sb) - 1);
  endfunction

  // A valid random descriptor: degree 1..min(sb,11), odd m_k < 2^k.
  function automatic sobol_desc_t rand_desc(int sb);
    sobol_desc_t d;
    int s;
    d = '0;
    s = 1 + int'($urandom % ((sb < 11) ? sb : 11));
    d.s = 5'(s);
    d.a = SOBOL_MAXB'($urandom & ((1 << (s - 1)) - 1));
    for (int k = 1; k <= s; k++)
      d.m[k-1] = SOBOL_MAXB'((($urandom % (1 << (k - 1))) * 2) + 1);
    return d;
  endfunction

  // First dimension (van der Corput): all direction integers 1.
  function automatic sobol_desc_t vdc_desc(int sb);
    sobol_desc_t d;
    d = '0;
    d.s = 5'(sb);
    for (int k = 1; k <= sb; k++) d.m[k-1] = 1;
    return d;
  endfunction

  // Second dimension: polynomial x + 1, m_1 = 1.
  function automatic sobol_desc_t dim2_desc();
    sobol_desc_t d;
    d = '0;
    d.s = 5'd1;
    d.m[0] = 1;
    return d;
  endfunction

  // Threshold rule: +1 (1) when T > x, else -1 (0).
  function automatic bit ref_hv_bit(int unsigned x, int unsigned t_code);
    return (x < t_code);
  endfunction

  // SCC * 2^frac, truncated toward zero.
  function automatic longint ref_scc(longint a, longint b, longint c, longint d, int frac);
    longint num, den, n, q;
    n   = a + b + c + d;
    num = a * d - b * c;
    if (a * d > b * c) begin
      longint mn;
      mn  = (a + b < a + c) ? a + b : a + c;
      den = n * mn - (a + b) * (a + c);
    end else begin
      longint mx;
      mx  = (a - d > 0) ? a - d : 0;
      den = (a + b) * (a + c) - n * mx;
    end
    if (num == 0 || den == 0) return 0;
    q = ((num < 0 ? -num : num) << frac) / den;
    return (num < 0) ? -q : q;
  endfunction

endpackage

// hdc_pkg: sizes, types and helper functions shared by the Sobol-based
// hyperdimensional (HDC) language classifier.
//
// The defaults follow the design point the classifier is evaluated at:
// hypervectors of D = 8192 bits, an alphabet of K = 28 symbols (26 letters,
// the space and one catch-all symbol), 4-grams, 21 language classes and a
// threshold T = 0.38 for the Sobol comparison (threshold code 3113). The
// number of comparator lanes (LANES), the counter width of the accumulators
// (CNT_W) and the symbol mapping are choices of this implementation.
//
// Number formats
//   * A Sobol point is an SB-bit binary fraction, x = code / 2^SB. For point
//     indices below 2^SB the Sobol recurrence produces at most SB fraction
//     bits, so SB = clog2(D) loses nothing.
//   * The threshold T is held as T_CODE = ceil(T * 2^SB). Then
//     "T <= x" is exactly "code >= T_CODE".
//   * A hypervector bit of 1 stands for +1 and a bit of 0 for -1.
package hdc_pkg;

  // Design point
  localparam int unsigned HV_D        = 8192;  // hypervector dimension D
  localparam int unsigned NUM_SYMBOLS = 28;    // K: 26 letters, space, other
  localparam int unsigned NGRAM_N     = 4;     // n-gram size
  localparam int unsigned NUM_CLASSES = 21;    // European languages
  localparam int unsigned LANES_DEF   = 64;    // points / bits handled per cycle
  localparam int unsigned CNT_W_DEF   = 24;    // accumulator counter width
  localparam int unsigned SB_DEF      = $clog2(HV_D); // Sobol fraction bits
  localparam int unsigned SOBOL_MAXB  = 16;    // widest SB a descriptor holds

  // Descriptor of one Sobol dimension, as in the Joe-Kuo tables:
  //   s      degree of the primitive polynomial (1..SB; s >= SB with all
  //          m = 1 gives the first, van der Corput, dimension)
  //   a      coefficients a_1..a_{s-1} packed as an integer, a_1 in the most
  //          significant used bit (bit s-2), a_{s-1} in bit 0
  //   m[k-1] initial direction integers m_1..m_s (odd, m_k < 2^k)
  // Fields are sized for SB up to SOBOL_MAXB so that smaller configurations
  // share the type.
  typedef struct packed {
    logic [4:0]                   s;
    logic [SOBOL_MAXB-1:0]                  a;
    logic [SOBOL_MAXB-1:0][SOBOL_MAXB-1:0]  m;
  } sobol_desc_t;

  // Operating mode of a text on the classifier
  typedef enum logic [0:0] {
    MODE_INFER = 1'b0,
    MODE_TRAIN = 1'b1
  } text_mode_e;

  // ASCII byte to symbol index: a-z and A-Z -> 0..25, space -> 26,
  // anything else -> 27.
  function automatic logic [4:0] char_to_symbol(input logic [7:0] c);
    if (c >= 8'h61 && c <= 8'h7a) return 5'(c - 8'h61);
    if (c >= 8'h41 && c <= 8'h5a) return 5'(c - 8'h41);
    if (c == 8'h20)               return 5'd26;
    return 5'd27;
  endfunction

endpackage

// elma_pkg: shared constants and types of the (8,1,5,5,7) log ELMA datapath.
//
// Number format. An operand is a sign plus a base-2 logarithm m.f, stored
// with posit (N=8, ES=1) tapering: m is coded as a posit exponent (regime
// plus ES exponent bits) and f takes the bits left over, at most
// N-3-ES = 4 bits. The value of a word is +-2^(m + f/16). Code 0 is zero,
// code 8'h80 is the single infinity point; negative words are the two's
// complement of the positive word, as for posits.
//
// Accumulator. Products are added, as linear values, into a fixed-point
// Kulisch accumulator restricted to [f_min^2, f_max] = [2^-24, 2^12]: 24
// fraction bits, 13 integer bits and a sign bit, 38 bits in total.
//
// The widths (N, ES, alpha=5, beta=5, gamma=7, 38-bit accumulator) follow
// the paper's main configuration. The field layout of the decoded structs
// is this design's own choice.
package elma_pkg;

  localparam int unsigned N      = 8;                    // word length
  localparam int unsigned ES     = 1;                    // posit exponent scale s
  localparam int unsigned FBITS  = N - 3 - ES;           // max log fraction bits (4)
  localparam int unsigned ALPHA  = 5;                    // bits of r(p(f))
  localparam int unsigned BETA   = 5;                    // bits of r(g) fed to q
  localparam int unsigned GAMMA  = 7;                    // bits of r(q(g))
  localparam int          MAXEXP = (N - 2) << ES;        // f_max = 2^12
  localparam int unsigned EXPW   = 5;                    // signed m in [-12, 12]
  localparam int unsigned PEXPW  = EXPW + 1;             // product m in [-24, 25]
  localparam int unsigned ACC_FRAC = 2 * MAXEXP;         // LSB weight 2^-24
  localparam int unsigned ACC_W  = MAXEXP + ACC_FRAC + 2; // 38 bits incl. sign
  localparam int unsigned BIASW  = 6;                    // signed exponent bias

  typedef logic [N-1:0] word_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic signed [BIASW-1:0] bias_t;

  localparam word_t WORD_ZERO = word_t'(0);
  localparam word_t WORD_INF  = word_t'(1) << (N - 1);

  // Decoded log number: +-2^(m + f/2^FBITS).
  typedef struct packed {
    logic                   sign;
    logic                   zero;
    logic                   inf;
    logic signed [EXPW-1:0] m;
    logic [FBITS-1:0]       f;
  } log_num_t;

  // Log-domain product, one extra bit of m.
  typedef struct packed {
    logic                    sign;
    logic                    zero;
    logic                    inf;
    logic signed [PEXPW-1:0] m;
    logic [FBITS-1:0]        f;
  } log_prod_t;

  localparam log_num_t LOG_ZERO = '{sign: 1'b0, zero: 1'b1, inf: 1'b0, m: '0, f: '0};

endpackage

// prive_pkg: types, default sizes and LUT-level functions shared by the
// Prive-HD inference datapath.
//
// Hyperdimensional (HD) encoding here works on binary hypervectors in which a
// bipolar -1 is stored as 0 and +1 as 1, so the product of two bipolar
// elements is an XNOR. Quantized query elements are ternary {-1, 0, +1} and
// travel as a 2-bit two's-complement code (00 = 0, 01 = +1, 11 = -1; the
// unused code 10 reads as 0). The code itself is a choice of this design.
//
// The three functions model the small look-up tables of the quantizers:
//   maj6      - majority of up to six bits, a tie resolved by a fixed bit
//               chosen at design time (one 6-input LUT),
//   tern_add3 - exact sum of three ternary values, -3..+3 in 3 bits (three
//               6-input LUTs, one per output bit),
//   sat_add3  - a 3-bit adder of the ternary tree, which keeps three bits by
//               dropping the least-significant bit of the 4-bit sum.
// tie_bit is the design-time hash that picks each LUT's tie bit; any fixed
// pseudo-random choice would do.
package prive_pkg;

  // Default sizes: 10,000 dimensions, 617 features and 26 classes (the
  // speech benchmark), 100 feature levels. Lanes, widths and beat size are
  // choices of this design.
  localparam int unsigned DEF_D_HV    = 10000;
  localparam int unsigned DEF_D_IV    = 617;
  localparam int unsigned DEF_LEVELS  = 100;
  localparam int unsigned DEF_N_CLASS = 26;
  localparam int unsigned DEF_P       = 100;
  localparam int unsigned DEF_CLASS_W = 16;
  localparam int unsigned DEF_NORM_W  = 16;
  localparam int unsigned DEF_ACC_W   = 32;
  localparam int unsigned DEF_FPB     = 8;

  typedef enum logic {QM_BIPOLAR = 1'b0, QM_TERNARY = 1'b1} qmode_e;

  typedef logic [1:0] tern_t;
  localparam tern_t T_ZERO = 2'b00;
  localparam tern_t T_POS  = 2'b01;
  localparam tern_t T_NEG  = 2'b11;

  // Design-time pseudo-random bit for (seed, idx).
  function automatic logic tie_bit(int unsigned seed, int unsigned idx);
    logic [31:0] h;
    h = seed * 32'h9E37_79B1 + idx * 32'h85EB_CA6B + 32'h27D4_EB2F;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    return h[7];
  endfunction

  // Majority of the low n bits of x (1 <= n <= 6); ties give tie.
  function automatic logic maj6(logic [5:0] x, int unsigned n, logic tie);
    int unsigned ones;
    ones = 0;
    for (int unsigned i = 0; i < 6; i++)
      if (i < n) ones += 32'(x[i]);
    if (2 * ones > n)       return 1'b1;
    else if (2 * ones == n) return tie;
    else                    return 1'b0;
  endfunction

  // True when the low n bits of x hold as many ones as zeros.
  function automatic logic maj6_tied(logic [5:0] x, int unsigned n);
    int unsigned ones;
    ones = 0;
    for (int unsigned i = 0; i < 6; i++)
      if (i < n) ones += 32'(x[i]);
    return 2 * ones == n;
  endfunction

  function automatic logic signed [2:0] tern_val(tern_t t);
    case (t)
      T_POS:   return 3'sd1;
      T_NEG:   return -3'sd1;
      default: return 3'sd0;
    endcase
  endfunction

  function automatic logic signed [2:0] tern_add3(tern_t a, tern_t b, tern_t c);
    return tern_val(a) + tern_val(b) + tern_val(c);
  endfunction

  function automatic logic signed [2:0] sat_add3(logic signed [2:0] a, logic signed [2:0] b);
    logic signed [3:0] s;
    s = {a[2], a} + {b[2], b};
    return 3'(s >>> 1);
  endfunction

  // Width of an index into n items, at least one bit.
  function automatic int unsigned idx_w(int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

endpackage

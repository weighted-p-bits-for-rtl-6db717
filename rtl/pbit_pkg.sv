// pbit_pkg: number formats and problem constants shared by the weighted p-bit design.
//
// All weights, biases and weighted sums use the signed fixed-point format s[x][2]: a sign, x
// integer bits and 2 fraction bits, so one LSB is 0.25. The default x = 4 is the width the
// full adder needs (range -16 .. 15.75). The weighted sum is carried on 12 bits, the width drawn
// at the Sum output of the p-bit diagram, and the activation lookup table reads s[3][2]
// (-8 .. 7.75, 6 bits).
//
// The package also holds the bipolar coupling matrices the design is demonstrated with (an
// AND gate and a 5 p-bit invertible full adder) and the constant functions that turn a bipolar
// problem into the binary weights the hardware uses:
//   J_bin = 2 * J_bip,   h_bin = h_bip - J_bip * 1      (state m in {0,1} instead of {-1,+1})
// and scale them by the inverse pseudo-temperature I0, given in quarter units (I0_Q = 4 is 1.0).
package pbit_pkg;

  localparam int W_INT  = 4;                  // x of s[x][2] for weights
  localparam int W_FRAC = 2;                  // fraction bits everywhere
  localparam int WW     = 1 + W_INT + W_FRAC; // weight width, 7
  localparam int SW     = 12;                 // weighted-sum width
  localparam int AW     = 6;                  // activation input width, s[3][2]
  localparam int ZW     = 32;                 // activation output / random number width
  localparam int MAX_N  = 16;                 // p-bits in a 4 x 4 tile

  typedef logic signed [WW-1:0] weight_t;
  typedef logic signed [SW-1:0] wsum_t;
  typedef logic signed [AW-1:0] act_t;

  // A problem for one tile, at most MAX_N p-bits. Index [i][j] is J_ij.
  typedef weight_t [MAX_N-1:0] wvec_t;
  typedef wvec_t   [MAX_N-1:0] wmat_t;

  // Limits of the activation input in sum units: 7.75 and -8.00.
  localparam wsum_t ACT_MAX = wsum_t'(31);
  localparam wsum_t ACT_MIN = -wsum_t'(32);

  // Small bipolar problem matrices (integers).
  typedef int ivec_t [MAX_N];
  typedef int imat_t [MAX_N][MAX_N];

  // AND gate, order A, B, C.
  localparam int AND_N = 3;
  localparam imat_t J_AND_BIP = '{
    0: '{0: 0, 1: -1, 2: 2, default: 0},
    1: '{0: -1, 1: 0, 2: 2, default: 0},
    2: '{0: 2, 1: 2, 2: 0, default: 0},
    default: 0};
  localparam ivec_t H_AND_BIP = '{0: 1, 1: 1, 2: -2, default: 0};

  // 5 p-bit full adder, order Cin, B, A, S, Cout. Its bias is zero in the bipolar basis.
  localparam int FA_N = 5;
  localparam int FA_CIN = 0, FA_B = 1, FA_A = 2, FA_S = 3, FA_COUT = 4;
  localparam imat_t J_FA_BIP = '{
    0: '{0: 0, 1: -1, 2: -1, 3: 1, 4: 2, default: 0},
    1: '{0: -1, 1: 0, 2: -1, 3: 1, 4: 2, default: 0},
    2: '{0: -1, 1: -1, 2: 0, 3: 1, 4: 2, default: 0},
    3: '{0: 1, 1: 1, 2: 1, 3: 0, 4: -2, default: 0},
    4: '{0: 2, 1: 2, 2: 2, 3: -2, 4: 0, default: 0},
    default: 0};
  localparam ivec_t H_FA_BIP = '{default: 0};

  // Binary-basis coupling matrix, scaled by I0 (quarter units) into s[x][2] codes.
  function automatic wmat_t bin_j(input imat_t jb, input int i0_q);
    wmat_t r;
    for (int i = 0; i < MAX_N; i++)
      for (int j = 0; j < MAX_N; j++)
        r[i][j] = weight_t'(2 * jb[i][j] * i0_q);
    return r;
  endfunction

  // Binary-basis bias h_bin = h_bip - J_bip * 1, scaled by I0 (quarter units).
  function automatic wvec_t bin_h(input imat_t jb, input ivec_t hb, input int i0_q);
    wvec_t r;
    for (int i = 0; i < MAX_N; i++) begin
      int acc;
      acc = hb[i];
      for (int j = 0; j < MAX_N; j++) acc -= jb[i][j];
      r[i] = weight_t'(acc * i0_q);
    end
    return r;
  endfunction

  // Seed of p-bit i of a tile: distinct per p-bit, never the LFSR lock-up word (all ones).
  function automatic logic [31:0] pbit_seed(input logic [31:0] base, input int i);
    logic [31:0] s;
    s = base ^ (32'h9E37_79B9 * 32'(i + 1));
    if (s == '1) s = 32'h1;
    return s;
  endfunction

endpackage

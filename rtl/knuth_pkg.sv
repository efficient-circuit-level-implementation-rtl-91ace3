// knuth_pkg -- code-construction constants shared by the Knuth Simple Parallel
// (SP) encoder and decoder.
//
// An n-bit data word w is coded by inverting its first k bits (counted from
// the MSB) for a k at which the word becomes balanced (d = 0) or nearly
// balanced (|ones - zeros| <= 2d), and appending a balanced parity word u that
// names k. Everything here is an elaboration-time function of (n, d):
//
//   num_steps(n,d)  N_u = ceil(n / (2d+1)), the number of flip counts kept.
//   flip_count(j)   k_j = floor((2j+1)(n-1) / (2 N_u) + 1/2), j = 0..N_u-1.
//                   For d = 0 this is simply k_j = j. For d = 1, 2 and n = 8
//                   it gives {1,4,6} and {2,5}, the sets used in the worked
//                   8-bit examples of the method. Every data position is
//                   then within d steps of a kept k, so the kept k nearest
//                   the balancing point leaves at most +-2d disparity.
//   parity_bits     P = smallest even p with C(p, p/2) >= N_u.
//   parity_word(j)  the j-th balanced P-bit word in increasing binary order
//                   (for P = 6: 000111, 001011, 001101, ...). Any one-to-one
//                   assignment of balanced words would do; this ordering is
//                   this design's choice.
//
// The resulting code lengths n+P equal the published SP figures for all
// even n from 4 to 72 and d = 0, 1, 2.
//
// The package also holds the step table of the 8-bit Knuth Optimized
// Parallel (OP) code. There the parity words need not be balanced, and each
// step j pairs a flip count OP8_K[j] with a 4-bit parity word OP8_U[j]. From
// one step to the next either k grows by one or the parity word gains a one,
// never both, so the disparity of the whole 12-bit codeword moves by +-2 per
// step. It goes from positive to negative over the ten steps, so some step
// balances it. This is the published 8-bit example table, copied as is.
package knuth_pkg;

  // Encoding algorithm of a codec.
  typedef enum logic {
    ALG_SP = 1'b0,   // Simple Parallel: balanced parity words, any even n
    ALG_OP = 1'b1    // Optimized Parallel: 8-bit balanced code of OP8_K/OP8_U
  } alg_e;

  localparam int unsigned OP8_N     = 8;
  localparam int unsigned OP8_P     = 4;
  localparam int unsigned OP8_STEPS = 10;
  localparam int unsigned OP8_K [OP8_STEPS] = '{0, 1, 1, 2, 3, 4, 5, 6, 6, 7};
  localparam logic [OP8_P-1:0] OP8_U [OP8_STEPS] = '{
    4'b0100, 4'b1000, 4'b0011, 4'b0101, 4'b0110,
    4'b1001, 4'b1010, 4'b1100, 4'b0111, 4'b1011
  };

  // Widest parity word the functions support (C(16,8) = 12870 steps).
  localparam int unsigned MAX_P = 16;
  typedef logic [MAX_P-1:0] parity_t;

  function automatic int unsigned binom(input int unsigned a, input int unsigned b);
    longint unsigned r, aa, bb;
    if (b > a) return 0;
    aa = 64'(a);
    bb = 64'(b);
    r  = 1;
    for (longint unsigned i = 1; i <= bb; i++) r = r * (aa - bb + i) / i;
    return 32'(r);
  endfunction

  function automatic int unsigned num_steps(input int unsigned n, input int unsigned d);
    return (n + 2*d) / (2*d + 1);
  endfunction

  function automatic int unsigned flip_count(input int unsigned n, input int unsigned d,
                                             input int unsigned j);
    int unsigned nu;
    nu = num_steps(n, d);
    return ((2*j + 1) * (n - 1) + nu) / (2 * nu);
  endfunction

  function automatic int unsigned parity_bits(input int unsigned n, input int unsigned d);
    int unsigned p;
    p = 2;
    while (binom(p, p/2) < num_steps(n, d) && p < MAX_P) p += 2;
    return p;
  endfunction

  // j-th (from 0) P-bit word with exactly P/2 ones, in increasing binary
  // order: walk from the MSB, placing a 0 whenever the words that start
  // with 0 at this position still include rank j.
  function automatic parity_t parity_word(input int unsigned p, input int unsigned j);
    parity_t     w;
    int unsigned ones_left, rank, c;
    w         = '0;
    ones_left = p / 2;
    rank      = j;
    for (int i = int'(p) - 1; i >= 0; i--) begin
      c = binom(i, ones_left);          // words with a 0 here
      if (ones_left != 0 && rank >= c) begin
        w[i]      = 1'b1;
        rank      = rank - c;
        ones_left = ones_left - 1;
      end
    end
    return w;
  endfunction

  // Balance-calculator pipeline depth: one register per adder-tree level
  // plus one on the comparison (6 for a 32-bit word).
  function automatic int unsigned bc_latency(input int unsigned n);
    return $clog2(n) + 1;
  endfunction

endpackage

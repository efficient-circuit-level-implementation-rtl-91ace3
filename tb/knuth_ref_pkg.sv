// knuth_ref_pkg -- behavioural reference model of the Knuth Simple Parallel
// code, for the testbenches.
//
// Written independently of the RTL's package: the kept flip counts use real
// arithmetic, k_j = floor((2j+1)(n-1)/(2 N_u) + 0.5); parity words are found
// by counting up through the integers and keeping those with p/2 ones; the
// encoder is the plain sequential search "first kept k whose flipped word is
// within +-2d". Words are carried in 128-bit vectors, LSB-aligned.
package knuth_ref_pkg;

  typedef logic [127:0] vec_t;

  function automatic int ref_nu(input int n, input int d);
    return int'($ceil(real'(n) / real'(2*d + 1)));
  endfunction

  function automatic int ref_k(input int n, input int d, input int j);
    real nu;
    nu = real'(ref_nu(n, d));
    return int'($floor(real'((2*j + 1) * (n - 1)) / (2.0 * nu) + 0.5));
  endfunction

  function automatic int ref_p(input int n, input int d);
    int cnt;
    for (int p = 2; p <= 16; p += 2) begin
      cnt = 0;
      for (int x = 0; x < (1 << p); x++) if ($countones(x) == p/2) cnt++;
      if (cnt >= ref_nu(n, d)) return p;
    end
    return -1;
  endfunction

  function automatic vec_t ref_parity(input int p, input int j);
    int seen;
    seen = 0;
    for (int x = 0; x < (1 << p); x++)
      if ($countones(x) == p/2) begin
        if (seen == j) return vec_t'(x);
        seen++;
      end
    return '1;
  endfunction

  // w with its k most significant (of n) bits inverted.
  function automatic vec_t flip_first(input vec_t w, input int n, input int k);
    vec_t r;
    r = w;
    for (int i = n - 1; i >= n - k; i--) r[i] = ~r[i];
    return r;
  endfunction

  function automatic int disparity(input vec_t w, input int width);
    int ones;
    ones = 0;
    for (int i = 0; i < width; i++) ones += int'(w[i]);
    return 2*ones - width;
  endfunction

  // Step j chosen for word w; -1 if no kept k is acceptable.
  function automatic int ref_step(input vec_t w, input int n, input int d);
    int v;
    for (int j = 0; j < ref_nu(n, d); j++) begin
      v = disparity(flip_first(w, n, ref_k(n, d, j)), n);
      if (v <= 2*d && v >= -2*d) return j;
    end
    return -1;
  endfunction

  // Full codeword {flipped word, parity word}.
  function automatic vec_t ref_encode(input vec_t w, input int n, input int d);
    int j, p;
    j = ref_step(w, n, d);
    p = ref_p(n, d);
    return (flip_first(w, n, ref_k(n, d, j)) << p) | ref_parity(p, j);
  endfunction

  // Test word whose first balancing flip count is exactly k (0 <= k < n):
  // z leading zeros then ones, with z = k + n/2 for k < n/2, else k - n/2.
  function automatic vec_t step_word(input int n, input int k);
    int z;
    vec_t w;
    z = (k < n/2) ? k + n/2 : k - n/2;
    w = '0;
    for (int i = 0; i < n - z; i++) w[i] = 1'b1;
    return w;
  endfunction

  // 8-bit Optimized Parallel code: step table as published in the worked
  // example, written out as text, and a sequential search for the first step
  // whose whole 12-bit codeword is balanced. Returns the step, -1 if none.
  localparam string OP_K = "0112345667";
  localparam string OP_U [10] = '{"0100", "1000", "0011", "0101", "0110",
                                  "1001", "1010", "1100", "0111", "1011"};

  function automatic vec_t op_u(input int j);
    vec_t u;
    u = '0;
    for (int i = 0; i < 4; i++) u[3 - i] = (OP_U[j][i] == "1");
    return u;
  endfunction

  function automatic int op_k(input int j);
    return int'(OP_K[j]) - int'("0");
  endfunction

  function automatic int ref_op_step(input vec_t w);
    for (int j = 0; j < 10; j++)
      if (disparity((flip_first(w, 8, op_k(j)) << 4) | op_u(j), 12) == 0) return j;
    return -1;
  endfunction

  function automatic vec_t ref_op_encode(input vec_t w);
    int j;
    j = ref_op_step(w);
    return (flip_first(w, 8, op_k(j)) << 4) | op_u(j);
  endfunction

endpackage

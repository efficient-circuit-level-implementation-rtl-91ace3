// enc_harness -- drives one sp_parallel_encoder(N, D) with its own stimulus
// and checks it against the reference model (knuth_ref_pkg).
//
// After `start` it presents NWORDS words, one per cycle: first FIRST_WORD,
// then in turn a random word, a word with about n/2 ones, and a word whose
// first balancing flip count is a chosen k (cycling through 0..n-1), so that
// every step j of the code is taken. Each output is checked LATENCY =
// $clog2(N)+2 cycles after its word: the full codeword and the chosen step.
// It also counts words for which more than one step was acceptable (the
// mux's priority decides) and words that fell to the last step, which has no
// balance calculator. first_code holds the codeword of FIRST_WORD.
module enc_harness
  import knuth_ref_pkg::*;
#(
  parameter int   N          = 8,
  parameter int   D          = 0,
  parameter int   NWORDS     = 1000,
  parameter vec_t FIRST_WORD = '0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures,
  output int   multi_hits,
  output int   last_hits,
  output int   steps_missed,
  output vec_t first_code
);
  localparam int NU  = knuth_pkg::num_steps(N, D);
  localparam int P   = knuth_pkg::parity_bits(N, D);
  localparam int M   = N + P;
  localparam int LAT = $clog2(N) + 2;
  localparam int IW  = (NU > 1) ? $clog2(NU) : 1;

  logic [N-1:0]  word;
  logic [M-1:0]  word_coded;
  logic [IW-1:0] flip_sel;

  sp_parallel_encoder #(.N(N), .D(D)) dut (.clk, .rst_n, .word, .word_coded, .flip_sel);

  int step_seen [NU];

  function automatic int acceptable_steps(input vec_t w);
    int c, v;
    c = 0;
    for (int j = 0; j < NU; j++) begin
      v = disparity(flip_first(w, N, ref_k(N, D, j)), N);
      if (v <= 2*D && v >= -2*D) c++;
    end
    return c;
  endfunction

  initial begin
    vec_t hist [$];
    vec_t w, exp_code;
    int   exp_j, nchecked;
    checks = 0; failures = 0; multi_hits = 0; last_hits = 0; steps_missed = 0;
    done = 1'b0; first_code = '0; nchecked = 0;
    foreach (step_seen[j]) step_seen[j] = 0;
    word = '0;
    wait (start);
    for (int t = 0; t < NWORDS + LAT + 1; t++) begin
      @(negedge clk);
      case (t % 3)
        0: w = {$urandom, $urandom, $urandom, $urandom};
        1: w = flip_first(vec_t'(N'({$urandom, $urandom})) & vec_t'({N{1'b1}}), N,
                          int'($urandom_range(N, 0)));
        default: w = step_word(N, (t / 3) % N);
      endcase
      if (t == 0) w = FIRST_WORD;
      w = w & vec_t'({N{1'b1}});
      word = N'(w);
      hist.push_back(w);
      if (hist.size() > LAT + 1) void'(hist.pop_front());
      if (hist.size() == LAT + 1 && nchecked < NWORDS) begin
        exp_j    = ref_step(hist[0], N, D);
        exp_code = ref_encode(hist[0], N, D);
        if (nchecked == 0) first_code = vec_t'(word_coded);
        nchecked++;
        checks += 2;
        if (exp_j < 0 || vec_t'(word_coded) !== exp_code) begin
          failures++;
          if (failures < 6)
            $display("FAIL enc N=%0d D=%0d word=%h code=%h exp=%h", N, D, hist[0],
                     word_coded, exp_code);
        end
        if (int'(flip_sel) != exp_j) begin
          failures++;
          if (failures < 6)
            $display("FAIL enc N=%0d D=%0d word=%h step=%0d exp=%0d", N, D, hist[0],
                     flip_sel, exp_j);
        end
        if (exp_j >= 0) step_seen[exp_j]++;
        if (acceptable_steps(hist[0]) > 1) multi_hits++;
        if (exp_j == NU - 1) last_hits++;
      end
    end
    foreach (step_seen[j]) if (step_seen[j] == 0) steps_missed++;
    done = 1'b1;
  end
endmodule

// codec_harness -- one zs_codec_top(N, D) in loopback, driven with its own
// stimulus and checked end to end.
//
// Each word must come back from the decoder $clog2(N)+3 cycles after it went
// in, every codeword must have at most 2D more ones than zeros or vice versa,
// and the codeword width must equal TABLE_M, the code length published for
// this (n, d). Counted: words needing at least one flip, words settled by the
// last candidate, and every step of the code taken.
module codec_harness
  import knuth_ref_pkg::*;
#(
  parameter int N       = 8,
  parameter int D       = 0,
  parameter int TABLE_M = 14,
  parameter int NWORDS  = 500
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures,
  output int   flip_hits,
  output int   last_hits,
  output int   steps_missed
);
  localparam int NU  = knuth_pkg::num_steps(N, D);
  localparam int M   = N + knuth_pkg::parity_bits(N, D);
  localparam int IW  = (NU > 1) ? $clog2(NU) : 1;
  localparam int LAT = $clog2(N) + 3;

  logic [N-1:0]  tx_word, rx_word;
  logic [M-1:0]  code;
  logic [IW-1:0] flip_sel;
  logic          code_err;

  zs_codec_top #(.N(N), .D(D)) dut (.clk, .rst_n, .tx_word, .tx_code(code),
    .tx_flip_sel(flip_sel), .rx_code(code), .rx_word, .rx_code_err(code_err));

  initial begin
    vec_t hist [$];
    vec_t w;
    int   v, step_seen [NU], nchecked;
    checks = 0; failures = 0; flip_hits = 0; last_hits = 0; steps_missed = 0;
    done = 1'b0; nchecked = 0; tx_word = '0;
    foreach (step_seen[j]) step_seen[j] = 0;
    checks++;
    if (M != TABLE_M) begin
      failures++;
      $display("FAIL N=%0d D=%0d code length %0d, published %0d", N, D, M, TABLE_M);
    end
    wait (start);
    for (int t = 0; nchecked < NWORDS; t++) begin
      @(negedge clk);
      w = (t % 2 == 0) ? vec_t'({$urandom, $urandom}) : step_word(N, (t / 2) % N);
      w = w & vec_t'({N{1'b1}});
      tx_word = N'(w);
      hist.push_back(w);
      // Codeword on the bus belongs to the word set LAT-1 cycles ago, the
      // decoded word to the one set LAT cycles ago (hist[0] after the pop).
      if (hist.size() >= LAT) begin
        v = disparity(vec_t'(code), M);
        checks++;
        if (v > 2*D || v < -2*D) begin
          failures++;
          if (failures < 6) $display("FAIL N=%0d D=%0d code %h disparity %0d", N, D, code, v);
        end
        step_seen[flip_sel]++;
        if (flip_sel != 0) flip_hits++;
        if (int'(flip_sel) == NU - 1) last_hits++;
      end
      if (hist.size() > LAT + 1) begin
        void'(hist.pop_front());
        nchecked++;
        checks++;
        if (vec_t'(rx_word) !== hist[0] || code_err) begin
          failures++;
          if (failures < 6) $display("FAIL N=%0d D=%0d sent %h got %h", N, D, hist[0], rx_word);
        end
      end
    end
    foreach (step_seen[j]) if (step_seen[j] == 0) steps_missed++;
    done = 1'b1;
  end
endmodule

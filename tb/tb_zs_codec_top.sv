// tb_zs_codec_top -- end-to-end test of the default codec (32 data bits,
// balanced, 40-bit codeword), with no parameter overrides.
//
// The encoder's bus output is looped back to the decoder's bus input through
// a model of the wires that, on some words, replaces the parity field with a
// value outside the code table. For each word the test checks:
//   - the codeword 7 cycles after the word: equal to the reference
//     encoding, 20 ones and 20 zeros;
//   - the decoded word 8 cycles after the word: equal to the word sent, or,
//     for a corrupted parity field, code_err set.
// Mechanisms counted, each of which must occur: every one of the 32 flip
// counts chosen, a word with several balanced candidates (priority mux), a
// word settled by the last candidate (no balance calculator), an invalid
// parity field detected, and a word that is already balanced (no flip).
module tb_zs_codec_top;
  import knuth_ref_pkg::*;

  localparam int N = 32, P = 8, M = 40, ENC_LAT = 7, NW = 3000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0] tx_word, rx_word;
  logic [M-1:0] tx_code, rx_code;
  logic [4:0]   tx_flip_sel;
  logic         rx_code_err;
  logic         corrupt;
  logic [P-1:0] bad_parity;

  zs_codec_top dut (.clk, .rst_n, .tx_word, .tx_code, .tx_flip_sel, .rx_code, .rx_word,
                    .rx_code_err);

  // The bus: straight wires, except that a corrupted word carries bad_parity.
  assign rx_code = corrupt ? {tx_code[M-1:P], bad_parity} : tx_code;

  int checks = 0, failures = 0;
  int step_seen [32];
  int n_multi = 0, n_last = 0, n_err = 0, n_zero = 0;

  function automatic logic in_table(input vec_t par);
    for (int j = 0; j < 32; j++) if (ref_parity(P, j) == par) return 1'b1;
    return 1'b0;
  endfunction

  function automatic int balanced_steps(input vec_t w);
    int c;
    c = 0;
    for (int k = 0; k < N; k++) if (disparity(flip_first(w, N, k), N) == 0) c++;
    return c;
  endfunction

  task automatic fail(input string msg);
    failures++;
    if (failures < 10) $display("FAIL %s", msg);
  endtask

  initial begin
    vec_t sent [$];
    logic corr [$];
    vec_t w, code_w, exp_code;
    int   t;
    foreach (step_seen[j]) step_seen[j] = 0;
    tx_word = '0; corrupt = 1'b0; bad_parity = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (t = 0; t < NW + ENC_LAT + 2; t++) begin
      @(negedge clk);
      // Stimulus for this cycle.
      case (t % 4)
        0: w = vec_t'($urandom);
        1: w = step_word(N, (t / 4) % N);
        2: w = flip_first(step_word(N, 0), N, int'($urandom_range(N, 0)));
        default: w = {96'b0, $urandom & $urandom};
      endcase
      tx_word = N'(w);
      sent.push_back(w);
      if (sent.size() > ENC_LAT + 2) void'(sent.pop_front());

      // Encoder output now on the bus: word sent ENC_LAT cycles ago.
      if (sent.size() >= ENC_LAT + 1 && t < NW + ENC_LAT) begin
        code_w   = sent[sent.size() - 1 - ENC_LAT];
        exp_code = ref_encode(code_w, N, 0);
        checks += 3;
        if (vec_t'(tx_code) !== exp_code)
          fail($sformatf("code word=%h got=%h exp=%h", code_w, tx_code, exp_code));
        if ($countones(tx_code) != M/2) fail($sformatf("unbalanced code %h", tx_code));
        if (int'(tx_flip_sel) != ref_step(code_w, N, 0)) fail("flip_sel");
        step_seen[ref_step(code_w, N, 0)]++;
        if (balanced_steps(code_w) > 1) n_multi++;
        if (ref_step(code_w, N, 0) == N - 1) n_last++;
        if (ref_step(code_w, N, 0) == 0) n_zero++;
        // Corrupt the parity field of every fifth word on the bus.
        corrupt = 1'b0;
        if (t % 5 == 0) begin
          bad_parity = P'($urandom);
          corrupt    = !in_table(vec_t'(bad_parity));
        end
      end else begin
        corrupt = 1'b0;
      end
      corr.push_back(corrupt);
      if (corr.size() > 2) void'(corr.pop_front());

      // Decoder output: bus word of one cycle ago, data word ENC_LAT+1 ago.
      if (sent.size() == ENC_LAT + 2 && corr.size() == 2) begin
        checks++;
        if (corr[0]) begin
          n_err++;
          if (!rx_code_err) fail("bad parity not flagged");
        end else if (rx_code_err || vec_t'(rx_word) !== sent[0]) begin
          fail($sformatf("round trip sent=%h got=%h err=%0b", sent[0], rx_word, rx_code_err));
        end
      end
    end
    foreach (step_seen[j]) begin
      checks++;
      if (step_seen[j] == 0) fail($sformatf("flip count %0d never chosen", j));
    end
    checks += 4;
    if (n_multi == 0) fail("no word with several balanced candidates");
    if (n_last == 0)  fail("last candidate never used");
    if (n_err == 0)   fail("no invalid parity field");
    if (n_zero == 0)  fail("no already-balanced word");
    $display("mechanisms: several-balanced=%0d last-candidate=%0d no-flip=%0d invalid-parity=%0d",
             n_multi, n_last, n_zero, n_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NW + 100) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

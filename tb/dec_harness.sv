// dec_harness -- drives one sp_decoder(N, D) with codewords made by the
// reference model and checks the decoded word one cycle later.
//
// Every fourth codeword gets a parity field that is not in the code's table
// (when such fields exist); then code_err must be set and the data field
// must come out unchanged. Otherwise code_err must be clear and the data
// must equal the word that was encoded. Each step j must occur.
module dec_harness
  import knuth_ref_pkg::*;
#(
  parameter int N      = 8,
  parameter int D      = 0,
  parameter int NWORDS = 1000
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures,
  output int   err_hits,
  output int   steps_missed
);
  localparam int NU = knuth_pkg::num_steps(N, D);
  localparam int P  = knuth_pkg::parity_bits(N, D);
  localparam int M  = N + P;

  logic [M-1:0] word_coded;
  logic [N-1:0] word;
  logic         code_err;

  sp_decoder #(.N(N), .D(D)) dut (.clk, .rst_n, .word_coded, .word, .code_err);

  function automatic logic in_table(input vec_t par);
    for (int j = 0; j < NU; j++) if (ref_parity(P, j) == par) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    vec_t w, code, par, exp_w;
    logic exp_err;
    int   step_seen [NU];
    checks = 0; failures = 0; err_hits = 0; steps_missed = 0; done = 1'b0;
    foreach (step_seen[j]) step_seen[j] = 0;
    word_coded = '0;
    wait (start);
    for (int t = 0; t < NWORDS; t++) begin
      @(negedge clk);
      w = (t % 2 == 0) ? vec_t'({$urandom, $urandom, $urandom})
                       : step_word(N, (t / 2) % N);
      w = w & vec_t'({N{1'b1}});
      code = ref_encode(w, N, D);
      step_seen[ref_step(w, N, D)]++;
      exp_w = w;
      exp_err = 1'b0;
      if (t % 4 == 3) begin
        par = vec_t'($urandom_range((1 << P) - 1, 0));
        if (!in_table(par)) begin
          code    = ((code >> P) << P) | par;
          exp_w   = code >> P;
          exp_err = 1'b1;
          err_hits++;
        end
      end
      word_coded = M'(code);
      @(negedge clk);
      checks += 2;
      if (vec_t'(word) !== exp_w) begin
        failures++;
        if (failures < 6) $display("FAIL dec N=%0d D=%0d code=%h word=%h exp=%h", N, D,
                                   code, word, exp_w);
      end
      if (code_err !== exp_err) begin
        failures++;
        if (failures < 6) $display("FAIL dec N=%0d D=%0d code=%h err=%0b exp=%0b", N, D,
                                   code, code_err, exp_err);
      end
    end
    foreach (step_seen[j]) if (step_seen[j] == 0) steps_missed++;
    done = 1'b1;
  end
endmodule

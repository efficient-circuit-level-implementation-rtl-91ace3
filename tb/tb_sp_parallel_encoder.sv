// tb_sp_parallel_encoder -- self-checking test of the SP parallel encoder.
//
// Five encoders run side by side: the 32-bit balanced one of the published
// block diagram and the 8-bit ones of the worked examples (+-0, +-2, +-4),
// plus a 12-bit +-2 encoder whose width is not a power of two. Each is
// checked word by word against the reference model (enc_harness), including
// the latency of $clog2(n)+2 cycles.
//
// Directed checks from the worked 8-bit examples, input 10111011:
//   +-0: flipped word 01001011, parity 010011
//   +-2: flipped word 00111011, parity 0011
//   +-4: flipped word 01111011, parity 01
// and, for 32 bits, the parity words of 0 and 1 flips, 00001111 and
// 00010111, which are the ones printed in the block diagram.
// Every step must be taken at least once, and there must be words with
// several acceptable steps and words that fall to the last step.
module tb_sp_parallel_encoder;
  import knuth_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  always #5 clk = ~clk;

  localparam int NW = 1500;
  localparam vec_t EX8 = 128'b10111011;

  int checks, failures;
  logic done   [5];
  int   c      [5];
  int   f      [5];
  int   multi  [5];
  int   last   [5];
  int   missed [5];
  vec_t first  [5];

  enc_harness #(.N(32), .D(0), .NWORDS(NW), .FIRST_WORD(128'h0))
    h0 (.clk, .rst_n, .start, .done(done[0]), .checks(c[0]), .failures(f[0]),
        .multi_hits(multi[0]), .last_hits(last[0]), .steps_missed(missed[0]),
        .first_code(first[0]));
  enc_harness #(.N(8), .D(0), .NWORDS(NW), .FIRST_WORD(EX8))
    h1 (.clk, .rst_n, .start, .done(done[1]), .checks(c[1]), .failures(f[1]),
        .multi_hits(multi[1]), .last_hits(last[1]), .steps_missed(missed[1]),
        .first_code(first[1]));
  enc_harness #(.N(8), .D(1), .NWORDS(NW), .FIRST_WORD(EX8))
    h2 (.clk, .rst_n, .start, .done(done[2]), .checks(c[2]), .failures(f[2]),
        .multi_hits(multi[2]), .last_hits(last[2]), .steps_missed(missed[2]),
        .first_code(first[2]));
  enc_harness #(.N(8), .D(2), .NWORDS(NW), .FIRST_WORD(EX8))
    h3 (.clk, .rst_n, .start, .done(done[3]), .checks(c[3]), .failures(f[3]),
        .multi_hits(multi[3]), .last_hits(last[3]), .steps_missed(missed[3]),
        .first_code(first[3]));
  enc_harness #(.N(12), .D(1), .NWORDS(NW), .FIRST_WORD(128'hFFF))
    h4 (.clk, .rst_n, .start, .done(done[4]), .checks(c[4]), .failures(f[4]),
        .multi_hits(multi[4]), .last_hits(last[4]), .steps_missed(missed[4]),
        .first_code(first[4]));

  task automatic check(input string what, input vec_t got, input vec_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  initial begin
    checks = 0; failures = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    start = 1'b1;
    wait (done[0] && done[1] && done[2] && done[3] && done[4]);
    for (int i = 0; i < 5; i++) begin
      checks += c[i] + 3;
      failures += f[i];
      if (missed[i] != 0) begin failures++; $display("FAIL harness %0d missed %0d steps", i, missed[i]); end
      if (multi[i] == 0) begin failures++; $display("FAIL harness %0d no multi-balanced word", i); end
      if (last[i] == 0) begin failures++; $display("FAIL harness %0d never used last step", i); end
      $display("harness %0d: checks=%0d failures=%0d multi=%0d last=%0d", i, c[i], f[i],
               multi[i], last[i]);
    end
    check("8-bit +-0 example", first[1], vec_t'({8'b01001011, 6'b010011}));
    check("8-bit +-2 example", first[2], vec_t'({8'b00111011, 4'b0011}));
    check("8-bit +-4 example", first[3], vec_t'({8'b01111011, 2'b01}));
    // All-zero 32-bit word: 16 flips, parity word number 16.
    check("32-bit zero word", first[0], vec_t'({16'hFFFF, 16'h0000, 8'(ref_parity(8, 16))}));
    check("32-bit parity of 0 flips", ref_parity(8, 0), vec_t'(knuth_pkg::parity_word(8, 0)));
    check("32-bit parity of 0 flips (diagram)", vec_t'(knuth_pkg::parity_word(8, 0)), 128'b00001111);
    check("32-bit parity of 1 flip (diagram)", vec_t'(knuth_pkg::parity_word(8, 1)), 128'b00010111);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NW + 200) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

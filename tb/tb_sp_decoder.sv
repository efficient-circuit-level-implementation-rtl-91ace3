// tb_sp_decoder -- self-checking test of the SP decoder at four sizes:
// 32 bits +-0 (40-bit code), 8 bits +-2, 16 bits +-4 and 64 bits +-2. Valid
// codewords from the reference encoder must decode to their data one cycle
// later; codewords with a parity field outside the table must raise
// code_err. Every step of each code is exercised.
module tb_sp_decoder;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  always #5 clk = ~clk;

  localparam int NW = 800;
  localparam int H  = 4;

  int checks, failures;
  logic done [H];
  int c [H], f [H], errs [H], missed [H];

  dec_harness #(.N(32), .D(0), .NWORDS(NW)) h0 (.clk, .rst_n, .start, .done(done[0]),
    .checks(c[0]), .failures(f[0]), .err_hits(errs[0]), .steps_missed(missed[0]));
  dec_harness #(.N(8), .D(1), .NWORDS(NW)) h1 (.clk, .rst_n, .start, .done(done[1]),
    .checks(c[1]), .failures(f[1]), .err_hits(errs[1]), .steps_missed(missed[1]));
  dec_harness #(.N(16), .D(2), .NWORDS(NW)) h2 (.clk, .rst_n, .start, .done(done[2]),
    .checks(c[2]), .failures(f[2]), .err_hits(errs[2]), .steps_missed(missed[2]));
  dec_harness #(.N(64), .D(1), .NWORDS(NW)) h3 (.clk, .rst_n, .start, .done(done[3]),
    .checks(c[3]), .failures(f[3]), .err_hits(errs[3]), .steps_missed(missed[3]));

  initial begin
    checks = 0; failures = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    start = 1'b1;
    wait (done[0] && done[1] && done[2] && done[3]);
    for (int i = 0; i < H; i++) begin
      checks += c[i] + 2;
      failures += f[i];
      if (missed[i] != 0) begin failures++; $display("FAIL harness %0d missed steps", i); end
      if (errs[i] == 0) begin failures++; $display("FAIL harness %0d no invalid code", i); end
      $display("harness %0d: checks=%0d failures=%0d invalid=%0d", i, c[i], f[i], errs[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2 * NW + 200) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_op_decoder -- self-checking test of the 8-bit Optimized Parallel
// decoder. Every data word is encoded by the reference model and must decode
// back one cycle later with code_err clear; then every data field is sent
// with each of the six 4-bit parity values outside the step table, which must
// set code_err and leave the data field uninverted.
module tb_op_decoder;
  import knuth_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [11:0] word_coded;
  logic [7:0]  word;
  logic        code_err;

  op_decoder dut (.clk, .rst_n, .word_coded, .word, .code_err);

  int checks = 0, failures = 0, n_invalid = 0;

  function automatic logic in_table(input int u);
    for (int j = 0; j < 10; j++) if (op_u(j) == vec_t'(u)) return 1'b1;
    return 1'b0;
  endfunction

  task automatic apply(input logic [11:0] code, input logic [7:0] exp_w, input logic exp_err);
    @(negedge clk);
    word_coded = code;
    @(negedge clk);
    checks += 2;
    if (word !== exp_w) begin
      failures++;
      if (failures < 8) $display("FAIL code=%b word=%h exp=%h", code, word, exp_w);
    end
    if (code_err !== exp_err) begin
      failures++;
      if (failures < 8) $display("FAIL code=%b err=%0b exp=%0b", code, code_err, exp_err);
    end
  endtask

  initial begin
    word_coded = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < 256; w++)
      apply(12'(ref_op_encode(vec_t'(w))), 8'(w), 1'b0);
    for (int f = 0; f < 256; f++)
      for (int u = 0; u < 16; u++)
        if (!in_table(u)) begin
          n_invalid++;
          apply({8'(f), 4'(u)}, 8'(f), 1'b1);
        end
    checks++;
    if (n_invalid != 6 * 256) begin
      failures++;
      $display("FAIL expected 6 unused parity values, found %0d", n_invalid / 256);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2 * 256 * 7 + 100) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

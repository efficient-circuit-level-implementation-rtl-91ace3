// tb_op_parallel_encoder -- self-checking test of the 8-bit Optimized
// Parallel encoder.
//
// All 256 data words are applied, one per cycle, twice (in order, then in a
// random order), and each 12-bit codeword and chosen step is compared,
// 6 cycles later, with the reference search over the published step table.
// Every codeword must be balanced and every one of the ten steps must occur.
// Directed check from the worked example: 10111011 -> 00111011 1000 (step 1).
module tb_op_parallel_encoder;
  import knuth_ref_pkg::*;

  localparam int LAT = 6, NW = 512;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [7:0]  word;
  logic [11:0] word_coded;
  logic [3:0]  flip_sel;

  op_parallel_encoder dut (.clk, .rst_n, .word, .word_coded, .flip_sel);

  int checks = 0, failures = 0;
  int step_seen [10];

  initial begin
    vec_t hist [$];
    vec_t w, exp_code;
    int   exp_j;
    foreach (step_seen[j]) step_seen[j] = 0;
    word = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < NW + LAT + 1; t++) begin
      @(negedge clk);
      w = (t < 256) ? vec_t'(t) : vec_t'($urandom_range(255, 0));
      if (t == 0) w = vec_t'(8'b10111011);
      word = 8'(w);
      hist.push_back(w);
      if (hist.size() > LAT + 1) void'(hist.pop_front());
      if (hist.size() == LAT + 1 && t < NW + LAT) begin
        exp_j    = ref_op_step(hist[0]);
        exp_code = ref_op_encode(hist[0]);
        checks += 3;
        if (exp_j < 0 || vec_t'(word_coded) !== exp_code) begin
          failures++;
          if (failures < 8) $display("FAIL word=%h code=%b exp=%b", hist[0], word_coded,
                                     exp_code[11:0]);
        end
        if (int'(flip_sel) != exp_j) begin
          failures++;
          if (failures < 8) $display("FAIL word=%h step=%0d exp=%0d", hist[0], flip_sel, exp_j);
        end
        if ($countones(word_coded) != 6) begin
          failures++;
          if (failures < 8) $display("FAIL unbalanced %b", word_coded);
        end
        if (exp_j >= 0) step_seen[exp_j]++;
        if (t == LAT) begin
          checks++;
          if (word_coded !== 12'b00111011_1000) begin
            failures++;
            $display("FAIL worked example: got %b", word_coded);
          end
        end
      end
    end
    foreach (step_seen[j]) begin
      checks++;
      if (step_seen[j] == 0) begin failures++; $display("FAIL step %0d never used", j); end
    end
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

// tb_op_codec -- the link top in its Optimized Parallel mode (8 data bits,
// 12-bit balanced codeword), end to end in loopback. Every word must return
// 7 cycles after it was sent, every codeword must have six ones, and every
// one of the ten code steps must be used.
module tb_op_codec;
  import knuth_pkg::*;
  import knuth_ref_pkg::*;

  localparam int LAT = 7, NW = 1000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [7:0]  tx_word, rx_word;
  logic [11:0] code;
  logic [3:0]  flip_sel;
  logic        code_err;

  zs_codec_top #(.ALG(ALG_OP), .N(8), .D(0)) dut (.clk, .rst_n, .tx_word, .tx_code(code),
    .tx_flip_sel(flip_sel), .rx_code(code), .rx_word, .rx_code_err(code_err));

  int checks = 0, failures = 0;
  int step_seen [10];

  initial begin
    vec_t hist [$];
    foreach (step_seen[j]) step_seen[j] = 0;
    tx_word = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < NW + LAT + 1; t++) begin
      @(negedge clk);
      tx_word = 8'($urandom);
      hist.push_back(vec_t'(tx_word));
      if (hist.size() >= LAT) begin
        checks++;
        step_seen[flip_sel]++;
        if ($countones(code) != 6) begin
          failures++;
          if (failures < 8) $display("FAIL unbalanced %b", code);
        end
      end
      if (hist.size() > LAT + 1) begin
        void'(hist.pop_front());
        checks++;
        if (vec_t'(rx_word) !== hist[0] || code_err) begin
          failures++;
          if (failures < 8) $display("FAIL sent %h got %h", hist[0], rx_word);
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

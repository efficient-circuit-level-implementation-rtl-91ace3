// tb_word_delay -- checks that the 32-bit, 6-deep word delay returns every
// random word exactly 6 cycles later, and that reset clears it.
module tb_word_delay;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  localparam int NCYC = 500;

  logic [31:0] d, q;
  logic [31:0] hist [$];

  word_delay #(.W(32), .DEPTH(6)) dut (.clk, .rst_n, .d, .q);

  initial begin
    d = $urandom;
    repeat (2) @(posedge clk);
    @(negedge clk);
    checks++;
    if (q !== '0) begin failures++; $display("FAIL reset q=%h", q); end
    rst_n = 1'b1;
    for (int cyc = 0; cyc < NCYC; cyc++) begin
      @(negedge clk);
      d = $urandom;
      hist.push_back(d);
      if (hist.size() > 7) begin
        void'(hist.pop_front());
        checks++;
        if (q !== hist[0]) begin
          failures++;
          if (failures < 10) $display("FAIL cyc=%0d q=%h exp=%h", cyc, q, hist[0]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCYC + 100) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

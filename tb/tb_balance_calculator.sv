// tb_balance_calculator -- self-checking test of the pipelined balance
// calculator.
//
// Three instances (32 bits +-0, 32 bits +-4, 12 bits +-2, the last one not a
// power of two) see a new word every cycle. Words are random, or have a
// chosen number of ones near n/2 so that both sides of the window edges are
// hit. Each output is compared with a count done here, LATENCY cycles after
// its word: 6 cycles for 32 bits and 5 for 12 bits ($clog2(n)+1).
module tb_balance_calculator;
  import knuth_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int hits_bal = 0, hits_unbal = 0;

  localparam int NCYC = 3000;

  logic [31:0] w32;
  logic [11:0] w12;
  logic b32_0, b32_2, b12_1;

  balance_calculator #(.N(32), .D(0)) dut_a (.clk, .rst_n, .word(w32), .balanced(b32_0));
  balance_calculator #(.N(32), .D(2)) dut_b (.clk, .rst_n, .word(w32), .balanced(b32_2));
  balance_calculator #(.N(12), .D(1)) dut_c (.clk, .rst_n, .word(w12), .balanced(b12_1));

  // Word with exactly c ones among n bits, at random positions.
  function automatic vec_t word_with_ones(input int n, input int c);
    vec_t w;
    int i, j;
    logic t;
    w = '0;
    for (i = 0; i < c; i++) w[i] = 1'b1;
    for (i = n - 1; i > 0; i--) begin
      j = int'($urandom_range(i, 0));
      t = w[i]; w[i] = w[j]; w[j] = t;
    end
    return w;
  endfunction

  logic [31:0] hist32 [$];
  logic [11:0] hist12 [$];

  task automatic expect_bal(input string name, input logic got, input vec_t w, input int n,
                            input int d);
    int v;
    logic exp;
    v   = disparity(w, n);
    exp = (v <= 2*d) && (v >= -2*d);
    checks++;
    if (exp) hits_bal++; else hits_unbal++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s word=%h got=%0b exp=%0b", name, w, got, exp);
    end
  endtask

  initial begin
    w32 = '0; w12 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < NCYC; cyc++) begin
      @(negedge clk);
      if ($urandom_range(1, 0) == 1) begin
        w32 = 32'(word_with_ones(32, 16 + int'($urandom_range(6, 0)) - 3));
        w12 = 12'(word_with_ones(12, 6 + int'($urandom_range(4, 0)) - 2));
      end else begin
        w32 = $urandom;
        w12 = 12'($urandom);
      end
      hist32.push_back(w32);
      hist12.push_back(w12);
      // Outputs now visible belong to the word set 6 (resp. 5) cycles ago;
      // hist[0] is that word once the queue holds latency+1 entries.
      if (hist32.size() > 7) begin
        void'(hist32.pop_front());
        expect_bal("n32d0", b32_0, vec_t'(hist32[0]), 32, 0);
        expect_bal("n32d2", b32_2, vec_t'(hist32[0]), 32, 2);
      end
      if (hist12.size() > 6) begin
        void'(hist12.pop_front());
        expect_bal("n12d1", b12_1, vec_t'(hist12[0]), 12, 1);
      end
    end
    checks++;
    if (hits_bal < 100 || hits_unbal < 100) begin
      failures++;
      $display("FAIL coverage balanced=%0d unbalanced=%0d", hits_bal, hits_unbal);
    end
    $display("coverage balanced=%0d unbalanced=%0d", hits_bal, hits_unbal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCYC + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

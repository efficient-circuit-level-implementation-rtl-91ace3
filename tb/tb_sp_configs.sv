// tb_sp_configs -- the twelve Simple Parallel codec configurations of the
// published study (n = 8, 16, 32, 64 data bits; disparity +-0, +-2, +-4),
// each run end to end in loopback through zs_codec_top.
//
// For every configuration the codeword length must equal the published code
// length, every codeword must meet its disparity bound, every word must come
// back unchanged, and every step of the code must be used. Published code
// lengths (data + parity bits):
//           n=8  n=16  n=32  n=64
//   +-0      14    22    40    72
//   +-2      12    20    38    72
//   +-4      10    20    38    70
module tb_sp_configs;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  always #5 clk = ~clk;

  localparam int NW = 600;
  localparam int H  = 12;

  int checks, failures;
  logic done [H];
  int c [H], f [H], flips [H], lasts [H], missed [H];

`define CODEC(I, NN, DD, MM) \
  codec_harness #(.N(NN), .D(DD), .TABLE_M(MM), .NWORDS(NW)) h``I (.clk, .rst_n, .start, \
    .done(done[I]), .checks(c[I]), .failures(f[I]), .flip_hits(flips[I]), \
    .last_hits(lasts[I]), .steps_missed(missed[I]));

  `CODEC(0,   8, 0, 14)
  `CODEC(1,  16, 0, 22)
  `CODEC(2,  32, 0, 40)
  `CODEC(3,  64, 0, 72)
  `CODEC(4,   8, 1, 12)
  `CODEC(5,  16, 1, 20)
  `CODEC(6,  32, 1, 38)
  `CODEC(7,  64, 1, 72)
  `CODEC(8,   8, 2, 10)
  `CODEC(9,  16, 2, 20)
  `CODEC(10, 32, 2, 38)
  `CODEC(11, 64, 2, 70)

  initial begin
    bit all_done;
    checks = 0; failures = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    start = 1'b1;
    do begin
      @(posedge clk);
      all_done = 1'b1;
      for (int i = 0; i < H; i++) if (!done[i]) all_done = 1'b0;
    end while (!all_done);
    for (int i = 0; i < H; i++) begin
      checks += c[i] + 3;
      failures += f[i];
      if (missed[i] != 0) begin failures++; $display("FAIL config %0d missed steps", i); end
      if (flips[i] == 0) begin failures++; $display("FAIL config %0d never flipped", i); end
      if (lasts[i] == 0) begin failures++; $display("FAIL config %0d last step unused", i); end
      $display("config %0d: checks=%0d failures=%0d flipped=%0d last=%0d", i, c[i], f[i],
               flips[i], lasts[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NW + 300) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

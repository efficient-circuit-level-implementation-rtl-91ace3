// zs_codec_top -- both ends of a zero-sum (ZS) coded single-ended bus.
//
// A ZS bus sends each N-bit data word as a codeword that holds (nearly) as
// many ones as zeros, so the total current drawn by the bus drivers hardly
// changes from word to word and simultaneous switching noise falls towards
// that of differential signalling, at far fewer than 2N wires. This top holds
// the transmit encoder and the receive decoder of one such bus. The bus
// drivers and receivers are analog parts outside this design; their signals
// are the ports tx_code and rx_code.
//
// Parameters:
//   ALG = ALG_SP (default): Knuth Simple Parallel code, sp_parallel_encoder
//         and sp_decoder, N data bits, disparity bound +-2D. The defaults
//         N = 32, D = 0 give a 40-bit balanced codeword; D = 1 or 2 give the
//         nearly-balanced codes (38 bits each at N = 32).
//   ALG = ALG_OP: Knuth Optimized Parallel code, op_parallel_encoder and
//         op_decoder; only its published 8-bit balanced table exists, so N
//         must be 8 and D 0 (12-bit codeword).
//
// Timing: tx_code follows tx_word by $clog2(N)+2 cycles for SP, 6 for OP;
// rx_word follows rx_code by one cycle. Wiring tx_code to rx_code returns
// each word one cycle after its codeword appeared. Pairing encoder and
// decoder in one top is this design's choice; each end would sit on a
// different chip.
module zs_codec_top
  import knuth_pkg::*;
#(
  parameter alg_e        ALG = ALG_SP,
  parameter int unsigned N   = 32,
  parameter int unsigned D   = 0,
  localparam int unsigned NU = (ALG == ALG_OP) ? OP8_STEPS : num_steps(N, D),
  localparam int unsigned M  = (ALG == ALG_OP) ? OP8_N + OP8_P : N + parity_bits(N, D),
  localparam int unsigned IW = (NU > 1) ? $clog2(NU) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // transmit side
  input  logic [N-1:0]  tx_word,
  output logic [M-1:0]  tx_code,
  output logic [IW-1:0] tx_flip_sel,
  // receive side
  input  logic [M-1:0]  rx_code,
  output logic [N-1:0]  rx_word,
  output logic          rx_code_err
);

  if (ALG == ALG_OP) begin : g_op
    op_parallel_encoder u_enc (
      .clk, .rst_n, .word(tx_word), .word_coded(tx_code), .flip_sel(tx_flip_sel)
    );
    op_decoder u_dec (
      .clk, .rst_n, .word_coded(rx_code), .word(rx_word), .code_err(rx_code_err)
    );
    initial assert (N == OP8_N && D == 0)
      else $error("zs_codec_top: the OP code exists only for N = 8, D = 0");
  end else begin : g_sp
    sp_parallel_encoder #(.N(N), .D(D)) u_enc (
      .clk, .rst_n, .word(tx_word), .word_coded(tx_code), .flip_sel(tx_flip_sel)
    );
    sp_decoder #(.N(N), .D(D)) u_dec (
      .clk, .rst_n, .word_coded(rx_code), .word(rx_word), .code_err(rx_code_err)
    );
  end

endmodule

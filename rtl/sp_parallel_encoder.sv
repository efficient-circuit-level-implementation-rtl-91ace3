// sp_parallel_encoder -- Knuth Simple Parallel balanced / nearly-balanced
// encoder, parallel architecture.
//
// Function: maps an N-bit data word to an (N+P)-bit codeword whose ones and
// zeros differ by at most 2D (D = 0: exactly balanced). The codeword is the
// data word with its first k bits inverted, counting from the MSB, followed
// by a P-bit balanced parity word that names k. Inverting one more bit moves
// the disparity by +-2, and inverting all N bits negates it, so some k in
// 0..N-1 balances the word. With D > 0 only N_u = ceil(N/(2D+1)) evenly spaced
// values k_j are kept, and one of them is always within D steps of the
// balancing k (see knuth_pkg for k_j, P and the parity table).
//
// How it works (all candidates at once):
//  - N_u-1 balance calculators check word ^ mask(k_j), j = 0..N_u-2, in
//    parallel. The last candidate needs no calculator: if none of the others
//    is acceptable, it must be.
//  - The data word waits in a word_delay of the calculators' depth, and the
//    same N_u masks are applied to the delayed copy. Each flipped copy gets
//    its parity word attached.
//  - least_flip_mux picks the acceptable candidate with the fewest inverted
//    bits, and an output register holds the codeword.
// For N = 32, D = 0 this is 31 calculators, a 6-cycle word delay and a
// 32-way mux of 40-bit words.
//
// Interface: `word` in every clock cycle; `word_coded` = {flipped word,
// parity word}; `flip_sel` is the chosen step j, an extra status output.
// Timing: word_coded belongs to the word presented LATENCY = $clog2(N)+2
// cycles earlier (7 for N = 32); throughput one word per cycle.
//
// Follows the published design: the flip rule, the MSB-first inversion, the
// calculator count, the 6-stage delay and output register at 32 bits, the
// choice of the least-flipped balanced word. This design's own choices: the
// parity table ordering, the data-then-parity bit order, no handshake, and
// an asynchronous active-low reset.
module sp_parallel_encoder
  import knuth_pkg::*;
#(
  parameter int unsigned N = 32,   // data bits, even
  parameter int unsigned D = 0,    // allowed codeword disparity +-2D (0, 1, 2)
  localparam int unsigned NU  = num_steps(N, D),
  localparam int unsigned P   = parity_bits(N, D),
  localparam int unsigned M   = N + P,
  localparam int unsigned BCL = bc_latency(N),
  localparam int unsigned IW  = (NU > 1) ? $clog2(NU) : 1,
  localparam int unsigned BW  = (NU > 1) ? NU - 1 : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  word,
  output logic [M-1:0]  word_coded,
  output logic [IW-1:0] flip_sel
);

  localparam int unsigned LATENCY = BCL + 1;

  logic [N-1:0]  word_r;            // word delayed by BCL cycles
  logic [BW-1:0] bal;               // balance results, candidates 0..NU-2
  logic [M-1:0]  cand [NU];
  logic [M-1:0]  word_coded_i;
  logic [IW-1:0] sel_idx;

  word_delay #(.W(N), .DEPTH(BCL)) u_delay (
    .clk, .rst_n, .d(word), .q(word_r)
  );

  for (genvar j = 0; j < NU; j++) begin : g_step
    localparam int unsigned K = flip_count(N, D, j);
    // Ones in the K most significant positions.
    localparam logic [N-1:0] MASK = ~({N{1'b1}} >> K);
    localparam logic [P-1:0] PW   = P'(parity_word(P, j));

    if (j < NU - 1) begin : g_calc
      balance_calculator #(.N(N), .D(D)) u_bc (
        .clk, .rst_n, .word(word ^ MASK), .balanced(bal[j])
      );
    end

    assign cand[j] = {word_r ^ MASK, PW};
  end

  if (NU == 1) begin : g_no_calc
    assign bal = '0;
  end

  least_flip_mux #(.NU(NU), .M(M)) u_mux (
    .cand, .bal, .sel_word(word_coded_i), .sel_idx
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word_coded <= '0;
      flip_sel   <= '0;
    end else begin
      word_coded <= word_coded_i;
      flip_sel   <= sel_idx;
    end
  end

  // The defining property of the code: once the pipeline has filled after
  // reset, every codeword has at most 2D more ones than zeros or vice versa.
  // The check sits in the clocked process so that reset switches it off.
  logic [LATENCY:0] filled;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      filled <= '0;
    end else begin
      filled <= {filled[LATENCY-1:0], 1'b1};
      if (filled[LATENCY]) begin
        a_disparity : assert ($countones(word_coded) >= M/2 - D &&
                              $countones(word_coded) <= M/2 + D)
          else $error("sp_parallel_encoder: codeword disparity out of range");
      end
    end
  end

endmodule

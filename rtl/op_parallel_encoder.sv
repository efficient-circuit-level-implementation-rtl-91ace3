// op_parallel_encoder -- 8-bit Knuth Optimized Parallel (OP) balanced
// encoder, parallel architecture.
//
// Function: maps an 8-bit data word to a 12-bit balanced codeword {data word
// with its first k bits inverted (from the MSB), 4-bit parity word u}. Unlike
// the Simple Parallel code, u need not be balanced; the data part then has
// to reach the opposite disparity, -v(u). The code walks through the ten
// steps (k_j, u_j) of knuth_pkg::OP8_K / OP8_U and uses the first step whose
// whole codeword is balanced. It needs 4 parity bits where the SP code needs
// 6, so the codeword is 12 bits instead of 14.
//
// How it works: the same structure as sp_parallel_encoder. Nine balance
// calculators check the full 12-bit candidates {word ^ mask(k_j), u_j},
// j = 0..8, in parallel; the tenth candidate needs none, since the walk
// guarantees it balances when no earlier one does. The data word waits in a
// word_delay as deep as the calculators (5 cycles for 12 bits), the
// candidates are rebuilt from the delayed word, least_flip_mux takes the
// lowest balanced step, and an output register holds the result.
//
// Interface: `word` every cycle; `word_coded` = {flipped word, parity word};
// `flip_sel` = chosen step j. Timing: word_coded follows word by 6 cycles.
// The step table and bit order follow the published 8-bit example; the
// parallel structure is that of the published SP encoder applied to this
// table, and its details (calculators on the whole codeword, latency,
// asynchronous active-low reset) are this design's choice.
module op_parallel_encoder
  import knuth_pkg::*;
#(
  localparam int unsigned N   = OP8_N,
  localparam int unsigned P   = OP8_P,
  localparam int unsigned M   = N + P,
  localparam int unsigned NU  = OP8_STEPS,
  localparam int unsigned BCL = bc_latency(M),
  localparam int unsigned IW  = $clog2(NU)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  word,
  output logic [M-1:0]  word_coded,
  output logic [IW-1:0] flip_sel
);

  logic [N-1:0]  word_r;
  logic [NU-2:0] bal;
  logic [M-1:0]  cand [NU];
  logic [M-1:0]  word_coded_i;
  logic [IW-1:0] sel_idx;

  word_delay #(.W(N), .DEPTH(BCL)) u_delay (
    .clk, .rst_n, .d(word), .q(word_r)
  );

  for (genvar j = 0; j < NU; j++) begin : g_step
    localparam logic [N-1:0] MASK = ~({N{1'b1}} >> OP8_K[j]);
    localparam logic [P-1:0] U    = OP8_U[j];

    if (j < NU - 1) begin : g_calc
      balance_calculator #(.N(M), .D(0)) u_bc (
        .clk, .rst_n, .word({word ^ MASK, U}), .balanced(bal[j])
      );
    end

    assign cand[j] = {word_r ^ MASK, U};
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

endmodule

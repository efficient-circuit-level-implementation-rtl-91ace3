// sp_decoder -- decoder for the Knuth Simple Parallel (nearly-)balanced code.
//
// Function: recovers the N-bit data word from an (N+P)-bit codeword
// {flipped word, parity word} made by sp_parallel_encoder with the same N
// and D. The parity word is looked up in the code's table (knuth_pkg) to find
// the step j and hence k_j, the number of leading bits the encoder inverted;
// inverting those k_j most significant data bits again gives the data back.
//
// How it works: one equality compare per table entry selects a constant
// inversion mask; no compare matching means the parity field is not a code
// parity word, reported on code_err with the data passed through uninverted.
// The lookup is the flat equivalent of a case-statement table, which is how
// the published decoders were described; code_err is this design's addition.
//
// Timing: the outputs are registered, one clock cycle after word_coded;
// one word per cycle. Asynchronous active-low reset (this design's choice).
module sp_decoder
  import knuth_pkg::*;
#(
  parameter int unsigned N = 32,
  parameter int unsigned D = 0,
  localparam int unsigned NU = num_steps(N, D),
  localparam int unsigned P  = parity_bits(N, D),
  localparam int unsigned M  = N + P
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [M-1:0] word_coded,
  output logic [N-1:0] word,
  output logic         code_err
);

  logic [N-1:0]  data_f;     // received (flipped) data field
  logic [P-1:0]  parity;
  logic [NU-1:0] hit;
  logic [N-1:0]  masks [NU];
  logic [N-1:0]  mask;

  assign {data_f, parity} = word_coded;

  for (genvar j = 0; j < NU; j++) begin : g_entry
    localparam int unsigned  K  = flip_count(N, D, j);
    localparam logic [P-1:0] PW = P'(parity_word(P, j));
    assign hit[j]   = (parity == PW);
    assign masks[j] = ~({N{1'b1}} >> K);
  end

  // Parity words are distinct, so at most one hit is set.
  always_comb begin
    mask = '0;
    for (int unsigned j = 0; j < NU; j++)
      if (hit[j]) mask = masks[j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word     <= '0;
      code_err <= 1'b0;
    end else begin
      word     <= data_f ^ mask;
      code_err <= (hit == '0);
    end
  end

endmodule

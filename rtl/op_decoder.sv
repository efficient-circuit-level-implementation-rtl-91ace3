// op_decoder -- decoder for the 8-bit Knuth Optimized Parallel code.
//
// Function: recovers the 8-bit data word from a 12-bit codeword {flipped
// word, parity word u} made by op_parallel_encoder. Each of the ten parity
// words of the step table (knuth_pkg::OP8_U) is distinct and names one flip
// count OP8_K[j]; the decoder matches u against the table and inverts that
// many leading (MSB) data bits again. Six of the sixteen 4-bit values are not
// in the table; they set code_err and pass the data through uninverted
// (this design's choice).
//
// Timing: outputs registered, one cycle after word_coded; one word per
// cycle; asynchronous active-low reset.
module op_decoder
  import knuth_pkg::*;
#(
  localparam int unsigned N = OP8_N,
  localparam int unsigned P = OP8_P,
  localparam int unsigned M = N + P
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [M-1:0] word_coded,
  output logic [N-1:0] word,
  output logic         code_err
);

  logic [N-1:0]         data_f;
  logic [P-1:0]         parity;
  logic [OP8_STEPS-1:0] hit;
  logic [N-1:0]         mask;

  assign {data_f, parity} = word_coded;

  always_comb begin
    mask = '0;
    for (int unsigned j = 0; j < OP8_STEPS; j++) begin
      hit[j] = (parity == OP8_U[j]);
      if (hit[j]) mask = ~({N{1'b1}} >> OP8_K[j]);
    end
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

// least_flip_mux -- selects the acceptable codeword with the fewest flips.
//
// The encoder offers NU candidate codewords, candidate j carrying the data
// word with its first k_j bits inverted, where k_j grows with j. Several
// candidates can be balanced at once; the code is defined by the smallest
// such j, so this is a priority selector: the lowest j whose balance flag is
// set wins. The last candidate has no flag. It is taken when no other one is
// balanced, because the code construction guarantees that it then is.
//
// Interface: cand[j] is candidate j (M bits), bal[j] its balance result for
// j = 0..NU-2, sel_word the chosen candidate and sel_idx its index j.
// Purely combinational; the encoder registers the output. The index output
// is an addition of this design for observation and testing.
module least_flip_mux #(
  parameter int unsigned NU = 32,   // number of candidates
  parameter int unsigned M  = 40,   // codeword width
  localparam int unsigned IW = (NU > 1) ? $clog2(NU) : 1,
  localparam int unsigned BW = (NU > 1) ? NU - 1 : 1
) (
  input  logic [M-1:0]  cand [NU],
  input  logic [BW-1:0] bal,        // unused when NU == 1
  output logic [M-1:0]  sel_word,
  output logic [IW-1:0] sel_idx
);

  always_comb begin
    sel_idx = IW'(NU - 1);
    for (int j = int'(NU) - 2; j >= 0; j--)
      if (bal[j]) sel_idx = IW'(j);
  end

  assign sel_word = cand[sel_idx];

endmodule

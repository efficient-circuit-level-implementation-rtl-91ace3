// word_delay -- fixed-depth register chain for the encoder's data path.
//
// While the balance calculators spend several cycles counting ones, the
// data word itself must wait so that the bit-flipped candidates built from it
// meet their balance results in the same cycle. This module is that wait:
// DEPTH registers in series (six in the published 32-bit encoder, drawn there
// as "Register 6 times").
//
// Interface and timing: q equals d from DEPTH clock cycles earlier; one word
// enters per cycle. DEPTH = 0 makes q a wire. The asynchronous active-low
// reset clears every stage, which is this design's choice.
module word_delay #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 6
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] stage [DEPTH];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int unsigned i = 0; i < DEPTH; i++) stage[i] <= '0;
      end else begin
        stage[0] <= d;
        for (int unsigned i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
      end
    end
    assign q = stage[DEPTH-1];
  end

endmodule

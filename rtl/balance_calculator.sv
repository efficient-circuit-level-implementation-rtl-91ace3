// balance_calculator -- pipelined ones counter with a disparity window test.
//
// Tells whether an N-bit word is balanced: its disparity, the number of ones
// minus the number of zeros, lies within +-2D (D = 0: exactly balanced).
// The encoder uses one of these per candidate bit-flipped word.
//
// How it works: the word is zero-padded to a power of two and the ones are
// summed in a binary adder tree, two partial counts per node, with a register
// after every tree level. A last registered stage compares the count c with
// the window N/2-D <= c <= N/2+D, which is the same as |2c - N| <= 2D.
//
// Timing: `balanced` belongs to the word presented LATENCY = $clog2(N)+1
// clock cycles earlier (6 for N = 32), and a new word can be presented every
// cycle. The depth matches the six-fold word delay of the published 32-bit
// encoder. The counting method itself (the published design cites a separate
// population-count algorithm) and where the registers sit are this design's
// choice; the reset is asynchronous and active low.
module balance_calculator #(
  parameter int unsigned N = 32,   // word width, even
  parameter int unsigned D = 0     // allowed disparity is +-2D
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] word,
  output logic         balanced
);

  localparam int unsigned LEVELS  = $clog2(N);        // adder-tree levels
  localparam int unsigned LEAVES  = 1 << LEVELS;      // padded width
  localparam int unsigned CW      = $clog2(N + 1);    // count width
  localparam int unsigned LATENCY = LEVELS + 1;

  logic [LEAVES-1:0] padded;
  assign padded = LEAVES'(word);

  // g_level[l].cnt[i]: i-th partial count after tree level l.
  for (genvar l = 1; l <= LEVELS; l++) begin : g_level
    localparam int unsigned NODES = LEAVES >> l;
    logic [CW-1:0] cnt [NODES];
    logic [CW-1:0] sum [NODES];
    if (l == 1) begin : g_leaf
      always_comb
        for (int unsigned i = 0; i < NODES; i++)
          sum[i] = CW'(padded[2*i]) + CW'(padded[2*i+1]);
    end else begin : g_node
      always_comb
        for (int unsigned i = 0; i < NODES; i++)
          sum[i] = g_level[l-1].cnt[2*i] + g_level[l-1].cnt[2*i+1];
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int unsigned i = 0; i < NODES; i++) cnt[i] <= '0;
      end else begin
        for (int unsigned i = 0; i < NODES; i++) cnt[i] <= sum[i];
      end
    end
  end

  localparam int unsigned LO = N/2 - D;
  localparam int unsigned HI = N/2 + D;
  logic [CW-1:0] ones;
  assign ones = g_level[LEVELS].cnt[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) balanced <= 1'b0;
    else        balanced <= (32'(ones) >= LO) && (32'(ones) <= HI);
  end

  initial begin
    assert (N >= 2 && N % 2 == 0) else $error("balance_calculator: N must be even");
    assert (D <= N/2) else $error("balance_calculator: D too large");
    assert (LATENCY == knuth_pkg::bc_latency(N));
  end

endmodule

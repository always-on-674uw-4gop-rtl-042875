// XNOR & popcount unit of the XNE.
//
// Multiplies N stationary input-channel bits with N weight bits in the
// binary {-1,+1} domain (bit 1 = +1): a product is +1 exactly when the two
// bits are equal, so N XNOR gates form the products and a reduction tree
// counts the +1 products. Following the paper, N = 128 and the count feeds
// the accumulators. Channels whose mask bit is 0 (layers with fewer than N
// input channels) contribute nothing; this masking is this design's way of
// "configuring the datapath" for narrow layers.
//
// The count needs clog2(N+1) = 8 bits for N = 128 (the paper's figure says
// 7 bits, which cannot represent a full match of all 128 bits).
//
// Timing: purely combinational, the result is registered by the
// accumulators.
module xne_xnor_popcount #(
  parameter int unsigned N  = 128,
  parameter int unsigned CW = $clog2(N + 1)
) (
  input  logic [N-1:0]  x,
  input  logic [N-1:0]  w,
  input  logic [N-1:0]  mask,
  output logic [CW-1:0] popcnt
);

  logic [N-1:0] prod;
  assign prod = ~(x ^ w) & mask;

  // balanced adder tree over the product bits
  localparam int unsigned LEVELS = $clog2(N);
  localparam int unsigned NP2    = 1 << LEVELS;

  logic [CW-1:0] tree [LEVELS+1][NP2];

  always_comb begin
    for (int l = 0; l <= LEVELS; l++)
      for (int k = 0; k < NP2; k++)
        tree[l][k] = '0;
    for (int k = 0; k < NP2; k++)
      tree[0][k] = (k < N) ? CW'(prod[k]) : '0;
    for (int l = 1; l <= LEVELS; l++)
      for (int k = 0; k < (NP2 >> l); k++)
        tree[l][k] = tree[l-1][2*k] + tree[l-1][2*k+1];
  end

  assign popcnt = tree[LEVELS][0];

endmodule

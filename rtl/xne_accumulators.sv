// Accumulator bank of the XNE.
//
// N registers of ACC_W bits, one per output channel (the paper: 128 x
// 16 bit). Each weight beat of the datapath produces one popcount for output
// channel idx, which is added to that channel's register; over the
// (ui, uj, ki_major) loops the registers build the full binary convolution
// sum of one output pixel. clr zeroes all registers before a new output
// pixel and wins over en. Additions wrap at 2^ACC_W (overflow behaviour is
// not specified; 16 bits hold up to 65535, far above a 3x3x384 layer's 3456).
//
// Timing: clr and en act on the rising clock edge; acc shows the registers.
module xne_accumulators #(
  parameter int unsigned N     = 128,
  parameter int unsigned ACC_W = 16,
  parameter int unsigned CW    = $clog2(N + 1),
  parameter int unsigned IW    = $clog2(N)
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   clr,
  input  logic                   en,
  input  logic [IW-1:0]          idx,
  input  logic [CW-1:0]          popcnt,
  output logic [N-1:0][ACC_W-1:0] acc
);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      acc <= '0;
    end else if (clr) begin
      acc <= '0;
    end else if (en) begin
      acc[idx] <= acc[idx] + ACC_W'(popcnt);
    end
  end

endmodule

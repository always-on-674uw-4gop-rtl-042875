// Behavioural model of a single-port 6T SRAM macro (memory cut), not
// synthesizable logic: on silicon this is a vendor-generated macro whose
// array and periphery sit on their own supply rails.
//
// Port: req with we/be/addr/wdata; reads return rdata one cycle later.
// To stand for an SRAM whose array/periphery voltage has been scaled below
// its safe limit, every bit of read data is flipped independently with
// probability ber / 2^32 (ber = 0: an ideal SRAM). Bit flips are uniformly
// distributed, the same error model the paper uses in its resilience study;
// the flip pattern comes from a deterministic xorshift hash of a per-cut
// 32-bit state (seeded with SEED) and the bit position, so runs repeat.
// The cut size (28 KB, four cuts per 112 KB bank) is the paper's.
module sram_cut #(
  parameter int unsigned WORDS = 7168,
  parameter logic [31:0] SEED  = 32'h1234_5678,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          req,
  input  logic          we,
  input  logic [3:0]    be,
  input  logic [AW-1:0] addr,
  input  logic [31:0]   wdata,
  output logic [31:0]   rdata,
  input  logic [31:0]   ber
);

  logic [31:0] mem [WORDS];
  logic [31:0] state_q;
  logic [31:0] flips;

  function automatic logic [31:0] xorshift32(input logic [31:0] v);
    logic [31:0] s;
    s = v;
    s = s ^ (s << 13);
    s = s ^ (s >> 17);
    s = s ^ (s << 5);
    return s;
  endfunction

  always_comb begin
    for (int b = 0; b < 32; b++) begin
      logic [31:0] r;
      r = xorshift32(xorshift32(state_q ^ (32'(b + 1) * 32'h9E37_79B9)));
      flips[b] = (r < ber);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)  state_q <= SEED;
    else if (req && !we) state_q <= xorshift32(state_q);
  end

  always_ff @(posedge clk_i) begin
    if (req) begin
      if (we) begin
        for (int b = 0; b < 4; b++)
          if (be[b]) mem[addr][8*b +: 8] <= wdata[8*b +: 8];
      end else begin
        rdata <= mem[addr] ^ flips;
      end
    end
  end

endmodule

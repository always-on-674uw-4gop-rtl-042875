// Standard-cell memory (SCM): a multi-port register file built from
// standard cells, the error-free part of the hybrid L2.
//
// WORDS 32-bit words with NR read ports and NW write ports. Writes take
// byte enables and act on the clock edge; if two write ports hit the same
// word in one cycle, the higher-numbered port wins for the bytes both enable.
// Reads are registered: rdata[r] holds the word addressed one cycle earlier
// (same latency as the SRAM cuts, so a bank looks the same whatever region is
// hit). A read and a write to the same word in one cycle return the old
// value. The silicon builds this array from latches with clock gating; here it
// is written as a flip-flop array so it maps on any library. Sizes (2 KB per
// interleaved bank, 8 KB 3-read/2-write in the private bank) are the paper's;
// the port timing is this design's choice.
module scm_mem #(
  parameter int unsigned WORDS = 512,
  parameter int unsigned NR    = 1,
  parameter int unsigned NW    = 1,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic                    clk_i,
  input  logic [NR-1:0]           re,
  input  logic [NR-1:0][AW-1:0]   raddr,
  output logic [NR-1:0][31:0]     rdata,
  input  logic [NW-1:0]           we,
  input  logic [NW-1:0][AW-1:0]   waddr,
  input  logic [NW-1:0][3:0]      wbe,
  input  logic [NW-1:0][31:0]     wdata
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    for (int r = 0; r < NR; r++)
      if (re[r]) rdata[r] <= mem[raddr[r]];
  end

  always_ff @(posedge clk_i) begin
    for (int w = 0; w < NW; w++)
      if (we[w])
        for (int b = 0; b < 4; b++)
          if (wbe[w][b]) mem[waddr[w]][8*b +: 8] <= wdata[w][8*b +: 8];
  end

endmodule

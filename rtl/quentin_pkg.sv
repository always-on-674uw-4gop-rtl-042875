// Shared types and the memory map of the SoC.
//
// Every memory-side master and slave in the design speaks the same simple
// request/grant protocol on 32-bit words (a TCDM-style bus):
//   * the master raises req with addr/we/be/wdata and holds them until gnt;
//   * a granted read returns rvalid with rdata exactly one cycle after gnt;
//   * a granted write also returns rvalid one cycle later (rdata meaningless).
// The address map is this design's choice (the paper gives only sizes):
//   ROM 0x1A00_0000 (8 KB), private L2 0x1C00_0000 (64 KB),
//   interleaved L2 0x1C01_0000 (456 KB = 4 banks x 114 KB, word interleaved).
package quentin_pkg;

  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } mem_rsp_t;

  localparam logic [31:0] ROM_BASE     = 32'h1A00_0000;
  localparam int unsigned ROM_BYTES    = 8 * 1024;
  localparam logic [31:0] L2_PRIV_BASE = 32'h1C00_0000;
  localparam int unsigned L2_PRIV_BYTES = 64 * 1024;
  localparam logic [31:0] L2_IL_BASE   = 32'h1C01_0000;
  localparam int unsigned IL_BANKS     = 4;
  // one interleaved bank: 2 KB SCM + 112 KB SRAM
  localparam int unsigned IL_BANK_BYTES = 114 * 1024;
  localparam int unsigned L2_IL_BYTES  = IL_BANKS * IL_BANK_BYTES;

endpackage

// One bank of the interleaved L2: 2 KB SCM plus 112 KB SRAM (four 28 KB
// cuts) behind a single 32-bit port.
//
// The request address is the word index inside the bank (the interconnect
// strips the interleaving bits). Words 0..SCM_WORDS-1 live in the SCM, the
// rest in the SRAM cuts in order, so with word interleaving over four banks
// the first 8 KB of the interleaved region are error-free SCM (where the
// thresholds belong) and the remaining 448 KB are voltage-scalable SRAM.
// This placement is this design's choice; the sizes follow the paper.
// The bank always grants; read data and the write acknowledge (rvalid)
// come one cycle after the request. ber sets the read bit-error rate of the
// SRAM cuts (see sram_cut); the SCM is never affected.
module l2_il_bank
  import quentin_pkg::*;
#(
  parameter int unsigned SCM_WORDS = 512,
  parameter int unsigned SRAM_CUTS = 4,
  parameter int unsigned CUT_WORDS = 7168,
  parameter logic [31:0] SEED      = 32'h0BAD_5EED
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mem_req_t req,
  output mem_rsp_t rsp,
  input  logic [31:0] ber
);

  localparam int unsigned WORDS = SCM_WORDS + SRAM_CUTS * CUT_WORDS;
  localparam int unsigned SAW   = $clog2(SCM_WORDS);
  localparam int unsigned CAW   = $clog2(CUT_WORDS);
  localparam int unsigned CSW   = (SRAM_CUTS > 1) ? $clog2(SRAM_CUTS) : 1;

  logic [31:0]          w;
  logic                 is_scm;
  logic [CSW-1:0]       cut;
  logic [31:0]          cut_off;
  logic [31:0]          scm_rdata;
  logic [SRAM_CUTS-1:0][31:0] cut_rdata;
  logic                 rvalid_q, scm_sel_q;
  logic [CSW-1:0]       cut_q;

  assign w      = req.addr;
  assign is_scm = (w < SCM_WORDS);

  always_comb begin
    cut     = '0;
    cut_off = w - SCM_WORDS;
    for (int c = 1; c < SRAM_CUTS; c++)
      if (w >= SCM_WORDS + c * CUT_WORDS) begin
        cut     = CSW'(c);
        cut_off = w - (SCM_WORDS + c * CUT_WORDS);
      end
  end

  scm_mem #(.WORDS(SCM_WORDS), .NR(1), .NW(1)) i_scm (
    .clk_i,
    .re    (req.req && !req.we && is_scm),
    .raddr (w[SAW-1:0]),
    .rdata (scm_rdata),
    .we    (req.req && req.we && is_scm),
    .waddr (w[SAW-1:0]),
    .wbe   (req.be),
    .wdata (req.wdata)
  );

  for (genvar c = 0; c < SRAM_CUTS; c++) begin : g_cut
    sram_cut #(.WORDS(CUT_WORDS), .SEED(SEED ^ (32'(c) << 24))) i_sram (
      .clk_i, .rst_ni,
      .req   (req.req && !is_scm && (w < WORDS) && (cut == CSW'(c))),
      .we    (req.we),
      .be    (req.be),
      .addr  (cut_off[CAW-1:0]),
      .wdata (req.wdata),
      .rdata (cut_rdata[c]),
      .ber   (ber)
    );
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q  <= 1'b0;
      scm_sel_q <= 1'b0;
      cut_q     <= '0;
    end else begin
      rvalid_q  <= req.req;
      scm_sel_q <= is_scm;
      cut_q     <= cut;
    end
  end

  assign rsp.gnt    = req.req;
  assign rsp.rvalid = rvalid_q;
  assign rsp.rdata  = scm_sel_q ? scm_rdata : cut_rdata[cut_q];

endmodule

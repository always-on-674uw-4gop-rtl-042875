// Memory and accelerator subsystem of an ultra-low-power BNN end node.
//
// Wires together the XNOR Neural Engine (XNE), the MCU interconnect, the four
// word-interleaved L2 banks (2 KB SCM + 112 KB SRAM each, 456 KB) and the
// 64 KB private L2 of the fabric controller (8 KB SCM + 56 KB SRAM). The
// parts this design does not contain -- the RISC-V core, the uDMA and its
// peripherals, the debug bridge, the ROM and the APB bus -- connect through
// ports: the core's instruction and data ports, two uDMA ports and the debug
// port enter the interconnect as masters; the ROM is a target port; the
// XNE's configuration slave (APB) and its end-of-job event are brought out.
//
// sram_ber is not a pin of the real chip: it sets the read bit-error rate of
// every SRAM cut (probability sram_ber / 2^32 per bit) and stands for the
// effect of the SRAM array/periphery supply being scaled below its safe
// voltage. SCM is never affected, which is the point of the hybrid memory:
// code, stack and thresholds kept in SCM stay correct while weights and
// activations in SRAM pick up errors.
module quentin_soc
  import quentin_pkg::*;
  import xne_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // core (fabric controller) ports
  input  mem_req_t    fc_instr_req,
  output mem_rsp_t    fc_instr_rsp,
  input  mem_req_t    fc_data_req,
  output mem_rsp_t    fc_data_rsp,
  // uDMA and debug bridge
  input  mem_req_t [1:0] udma_req,
  output mem_rsp_t [1:0] udma_rsp,
  input  mem_req_t    dbg_req,
  output mem_rsp_t    dbg_rsp,
  // ROM (outside)
  output mem_req_t    rom_req,
  input  mem_rsp_t    rom_rsp,
  // XNE configuration slave (APB) and event
  input  logic        xne_psel,
  input  logic        xne_penable,
  input  logic        xne_pwrite,
  input  logic [11:0] xne_paddr,
  input  logic [31:0] xne_pwdata,
  output logic [31:0] xne_prdata,
  output logic        xne_pready,
  output logic        xne_evt_done,
  // SRAM bit-error rate (voltage over-scaling model)
  input  logic [31:0] sram_ber
);

  localparam int unsigned NM = 5 + XNE_PORTS;

  mem_req_t [NM-1:0]        m_req;
  mem_rsp_t [NM-1:0]        m_rsp;
  mem_req_t [XNE_PORTS-1:0] xne_req;
  mem_rsp_t [XNE_PORTS-1:0] xne_rsp;
  mem_req_t [IL_BANKS-1:0]  bank_req;
  mem_rsp_t [IL_BANKS-1:0]  bank_rsp;
  mem_req_t [2:0]           priv_req;
  mem_rsp_t [2:0]           priv_rsp;

  assign m_req[0] = fc_instr_req;
  assign m_req[1] = fc_data_req;
  assign m_req[2] = udma_req[0];
  assign m_req[3] = udma_req[1];
  assign m_req[4] = dbg_req;
  assign m_req[NM-1:5] = xne_req;
  assign fc_instr_rsp = m_rsp[0];
  assign fc_data_rsp  = m_rsp[1];
  assign udma_rsp[0]  = m_rsp[2];
  assign udma_rsp[1]  = m_rsp[3];
  assign dbg_rsp      = m_rsp[4];
  assign xne_rsp      = m_rsp[NM-1:5];

  xne i_xne (
    .clk_i, .rst_ni,
    .psel (xne_psel), .penable (xne_penable), .pwrite (xne_pwrite),
    .paddr (xne_paddr), .pwdata (xne_pwdata), .prdata (xne_prdata), .pready (xne_pready),
    .mem_req (xne_req), .mem_rsp (xne_rsp),
    .evt_done (xne_evt_done)
  );

  mcu_interconnect #(.NM(NM), .FC_INSTR(0), .FC_DATA(1)) i_interco (
    .clk_i, .rst_ni,
    .m_req, .m_rsp,
    .bank_req, .bank_rsp,
    .priv_req, .priv_rsp,
    .rom_req, .rom_rsp
  );

  for (genvar b = 0; b < IL_BANKS; b++) begin : g_bank
    l2_il_bank #(.SEED(32'h5EED_0000 + 32'(b))) i_bank (
      .clk_i, .rst_ni,
      .req (bank_req[b]),
      .rsp (bank_rsp[b]),
      .ber (sram_ber)
    );
  end

  l2_priv_bank i_priv (
    .clk_i, .rst_ni,
    .req (priv_req),
    .rsp (priv_rsp),
    .ber (sram_ber)
  );

endmodule

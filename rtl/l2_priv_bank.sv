// Private L2 bank of the fabric controller (64 KB): an 8 KB
// 3-read/2-write SCM, a 24 KB SRAM cut and a 32 KB SRAM cut.
//
// Three ports: P_I (core instructions, read only), P_D (core data) and P_S
// (every other master, via the interconnect's arbiter). As in the paper, the
// SCM gives the core's instruction and data interfaces two read ports and one
// write port of their own, and the system port one read and one write port,
// so SCM accesses never conflict. The SRAM cuts are single ported: when
// several ports hit the same cut in one cycle, data beats instructions beats
// system (this design's choice) and the losers see gnt low and retry.
// Addresses are word indices: SCM first, then the 24 KB and the 32 KB cut
// (this design's choice). Read data / write acknowledge arrive one cycle
// after the grant. ber sets the SRAM read bit-error rate.
module l2_priv_bank
  import quentin_pkg::*;
#(
  parameter int unsigned SCM_WORDS   = 2048,
  parameter int unsigned SRAM0_WORDS = 6144,
  parameter int unsigned SRAM1_WORDS = 8192
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  mem_req_t [2:0]    req,   // 0: P_I, 1: P_D, 2: P_S
  output mem_rsp_t [2:0]    rsp,
  input  logic [31:0]       ber
);

  localparam int unsigned PI = 0, PD = 1, PS = 2;
  localparam int unsigned SAW = $clog2(SCM_WORDS);
  localparam int unsigned A0W = $clog2(SRAM0_WORDS);
  localparam int unsigned A1W = $clog2(SRAM1_WORDS);
  localparam int unsigned B0  = SCM_WORDS;
  localparam int unsigned B1  = SCM_WORDS + SRAM0_WORDS;
  localparam int unsigned END = B1 + SRAM1_WORDS;

  typedef enum logic [1:0] {R_SCM, R_S0, R_S1, R_NONE} region_e;

  region_e [2:0] region, region_q;
  logic    [2:0] gnt, rvalid_q;
  logic    [2:0] win0, win1;
  logic [2:0][31:0] scm_rdata;
  logic [31:0]   s0_rdata, s1_rdata;
  logic [1:0]    s0_port, s1_port;

  always_comb begin
    for (int p = 0; p < 3; p++) begin
      if (req[p].addr < B0)       region[p] = R_SCM;
      else if (req[p].addr < B1)  region[p] = R_S0;
      else if (req[p].addr < END) region[p] = R_S1;
      else                        region[p] = R_NONE;
    end
  end

  // fixed-priority arbitration on the SRAM cuts: D > I > S
  function automatic logic [2:0] pick(input logic [2:0] r);
    if (r[PD])      return 3'b010;
    else if (r[PI]) return 3'b001;
    else if (r[PS]) return 3'b100;
    else            return 3'b000;
  endfunction

  always_comb begin
    logic [2:0] r0, r1;
    for (int p = 0; p < 3; p++) begin
      r0[p] = req[p].req && (region[p] == R_S0);
      r1[p] = req[p].req && (region[p] == R_S1);
    end
    win0 = pick(r0);
    win1 = pick(r1);
    for (int p = 0; p < 3; p++)
      gnt[p] = req[p].req && ((region[p] == R_SCM) || (region[p] == R_NONE) || win0[p] || win1[p]);
  end

  assign s0_port = win0[PD] ? 2'(PD) : win0[PI] ? 2'(PI) : 2'(PS);
  assign s1_port = win1[PD] ? 2'(PD) : win1[PI] ? 2'(PI) : 2'(PS);

  // SCM: read ports I, D, S; write ports D, S
  logic [2:0]          scm_re;
  logic [2:0][SAW-1:0] scm_raddr;
  logic [1:0]          scm_we;
  logic [1:0][SAW-1:0] scm_waddr;
  logic [1:0][3:0]     scm_wbe;
  logic [1:0][31:0]    scm_wdata;

  always_comb begin
    for (int p = 0; p < 3; p++) begin
      scm_re[p]    = req[p].req && (region[p] == R_SCM) && (p == PI || !req[p].we);
      scm_raddr[p] = req[p].addr[SAW-1:0];
    end
    for (int k = 0; k < 2; k++) begin
      scm_we[k]    = req[PD+k].req && req[PD+k].we && (region[PD+k] == R_SCM);
      scm_waddr[k] = req[PD+k].addr[SAW-1:0];
      scm_wbe[k]   = req[PD+k].be;
      scm_wdata[k] = req[PD+k].wdata;
    end
  end

  scm_mem #(.WORDS(SCM_WORDS), .NR(3), .NW(2)) i_scm (
    .clk_i,
    .re (scm_re), .raddr (scm_raddr), .rdata (scm_rdata),
    .we (scm_we), .waddr (scm_waddr), .wbe (scm_wbe), .wdata (scm_wdata)
  );

  logic [31:0] s0_addr, s1_addr;
  assign s0_addr = req[s0_port].addr - B0;
  assign s1_addr = req[s1_port].addr - B1;

  sram_cut #(.WORDS(SRAM0_WORDS), .SEED(32'hC0FF_EE01)) i_sram0 (
    .clk_i, .rst_ni,
    .req   (|win0),
    .we    (req[s0_port].we && (s0_port != 2'(PI))),
    .be    (req[s0_port].be),
    .addr  (s0_addr[A0W-1:0]),
    .wdata (req[s0_port].wdata),
    .rdata (s0_rdata),
    .ber   (ber)
  );

  sram_cut #(.WORDS(SRAM1_WORDS), .SEED(32'hC0FF_EE02)) i_sram1 (
    .clk_i, .rst_ni,
    .req   (|win1),
    .we    (req[s1_port].we && (s1_port != 2'(PI))),
    .be    (req[s1_port].be),
    .addr  (s1_addr[A1W-1:0]),
    .wdata (req[s1_port].wdata),
    .rdata (s1_rdata),
    .ber   (ber)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= '0;
      region_q <= {3{R_NONE}};
    end else begin
      rvalid_q <= gnt;
      region_q <= region;
    end
  end

  always_comb begin
    for (int p = 0; p < 3; p++) begin
      rsp[p].gnt    = gnt[p];
      rsp[p].rvalid = rvalid_q[p];
      unique case (region_q[p])
        R_SCM:   rsp[p].rdata = scm_rdata[p];
        R_S0:    rsp[p].rdata = s0_rdata;
        R_S1:    rsp[p].rdata = s1_rdata;
        default: rsp[p].rdata = '0;
      endcase
    end
  end

  // the instruction port only reads
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(req[PI].req && req[PI].we))
    else $error("private bank: write on instruction port");

endmodule

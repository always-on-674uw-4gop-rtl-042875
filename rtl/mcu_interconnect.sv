// MCU interconnect: crossbar between the SoC's memory masters and the L2.
//
// Masters (default NM = 9): 0 core instruction port, 1 core data port,
// 2-3 uDMA, 4 debug bridge, 5-8 the XNE's four ports. Targets: the four
// interleaved banks, the private bank's instruction, data and system ports,
// and the ROM. Decoding (map in quentin_pkg):
//   * interleaved L2: bank = byte address bits [3:2] (32-bit word
//     interleaving), word inside the bank = offset >> 4. Consecutive words
//     land in consecutive banks, so the XNE's four ports reading one 16-byte
//     aligned word hit four different banks;
//   * private L2: the core's instruction / data masters reach their
//     dedicated private-bank ports, every other master the system port;
//     word = offset >> 2;
//   * ROM: word = offset >> 2;
//   * anything else is granted at once and reads 0.
// Each target has a round-robin arbiter; a master is granted when its
// arbiter picks it and the target grants. The target answers one cycle
// after the grant and the answer is routed back to the master granted then.
// Word interleaving, round robin and the map are this design's choices: the
// paper says the banks are interleaved by the interconnect to reduce
// conflicts, without details.
// All flops use an asynchronous active-low reset; rst_ni also appears in the
// disable clause of the request-stability assertion, which is why lint sees
// it used both ways. The assertion is not part of the circuit.
module mcu_interconnect
  import quentin_pkg::*;
#(
  parameter int unsigned NM       = 9,
  parameter int unsigned FC_INSTR = 0,
  parameter int unsigned FC_DATA  = 1
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  mem_req_t [NM-1:0]  m_req,
  output mem_rsp_t [NM-1:0]  m_rsp,
  output mem_req_t [IL_BANKS-1:0] bank_req,
  input  mem_rsp_t [IL_BANKS-1:0] bank_rsp,
  output mem_req_t [2:0]     priv_req,   // 0: instruction, 1: data, 2: system
  input  mem_rsp_t [2:0]     priv_rsp,
  output mem_req_t           rom_req,
  input  mem_rsp_t           rom_rsp
);

  localparam int unsigned NT  = IL_BANKS + 4;   // banks, priv I/D/S, ROM
  localparam int unsigned T_PI = IL_BANKS, T_PD = IL_BANKS + 1, T_PS = IL_BANKS + 2, T_ROM = IL_BANKS + 3;
  localparam int unsigned MW  = (NM > 1) ? $clog2(NM) : 1;
  localparam int unsigned TW  = $clog2(NT + 1);
  localparam logic [TW-1:0] T_NONE = TW'(NT);

  logic [NM-1:0][TW-1:0]  tgt;
  logic [NM-1:0][31:0]    laddr;
  mem_req_t [NT-1:0]      t_req;
  mem_rsp_t [NT-1:0]      t_rsp;
  logic [NT-1:0][NM-1:0]  t_reqv, t_gnt;
  logic [NT-1:0][MW-1:0]  t_idx;
  logic [NT-1:0]          t_busy_q;
  logic [NT-1:0][MW-1:0]  t_owner_q;
  logic [NM-1:0]          err_q;

  // address decoding
  always_comb begin
    for (int m = 0; m < NM; m++) begin
      logic [31:0] a;
      a = m_req[m].addr;
      tgt[m]   = T_NONE;
      laddr[m] = '0;
      if (a >= L2_IL_BASE && a < L2_IL_BASE + L2_IL_BYTES) begin
        tgt[m]   = TW'((a - L2_IL_BASE) >> 2) & TW'(IL_BANKS - 1);
        laddr[m] = (a - L2_IL_BASE) >> 4;
      end else if (a >= L2_PRIV_BASE && a < L2_PRIV_BASE + L2_PRIV_BYTES) begin
        tgt[m]   = (m == FC_INSTR) ? TW'(T_PI) : (m == FC_DATA) ? TW'(T_PD) : TW'(T_PS);
        laddr[m] = (a - L2_PRIV_BASE) >> 2;
      end else if (a >= ROM_BASE && a < ROM_BASE + ROM_BYTES) begin
        tgt[m]   = TW'(T_ROM);
        laddr[m] = (a - ROM_BASE) >> 2;
      end
    end
  end

  for (genvar t = 0; t < NT; t++) begin : g_tgt
    always_comb begin
      for (int m = 0; m < NM; m++)
        t_reqv[t][m] = m_req[m].req && (tgt[m] == TW'(t));
    end

    rr_arbiter #(.N(NM)) i_arb (
      .clk_i, .rst_ni,
      .req     (t_reqv[t]),
      .advance (t_rsp[t].gnt),
      .gnt     (t_gnt[t]),
      .idx     (t_idx[t])
    );

    always_comb begin
      t_req[t]      = m_req[t_idx[t]];
      t_req[t].req  = |t_reqv[t];
      t_req[t].addr = laddr[t_idx[t]];
    end

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        t_busy_q[t]  <= 1'b0;
        t_owner_q[t] <= '0;
      end else begin
        t_busy_q[t]  <= t_req[t].req && t_rsp[t].gnt;
        t_owner_q[t] <= t_idx[t];
      end
    end
  end

  assign bank_req = t_req[IL_BANKS-1:0];
  assign priv_req = t_req[T_PS:T_PI];
  assign rom_req  = t_req[T_ROM];
  always_comb begin
    for (int b = 0; b < IL_BANKS; b++) t_rsp[b] = bank_rsp[b];
    t_rsp[T_PI]  = priv_rsp[0];
    t_rsp[T_PD]  = priv_rsp[1];
    t_rsp[T_PS]  = priv_rsp[2];
    t_rsp[T_ROM] = rom_rsp;
  end

  // unmapped accesses: immediate grant, zero data next cycle
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) err_q <= '0;
    else for (int m = 0; m < NM; m++) err_q[m] <= m_req[m].req && (tgt[m] == T_NONE);
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      m_rsp[m].gnt    = m_req[m].req && (tgt[m] == T_NONE);
      m_rsp[m].rvalid = err_q[m];
      m_rsp[m].rdata  = '0;
      for (int t = 0; t < NT; t++) begin
        if (t_gnt[t][m] && t_rsp[t].gnt) m_rsp[m].gnt = 1'b1;
        if (t_busy_q[t] && t_owner_q[t] == MW'(m)) begin
          m_rsp[m].rvalid = t_rsp[t].rvalid;
          m_rsp[m].rdata  = t_rsp[t].rdata;
        end
      end
    end
  end

  // a master must hold its request stable until granted
  for (genvar m = 0; m < NM; m++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      m_req[m].req && !m_rsp[m].gnt |=> m_req[m].req && $stable(m_req[m].addr) && $stable(m_req[m].we))
      else $error("interconnect: master %0d dropped or changed a pending request", m);
  end

endmodule

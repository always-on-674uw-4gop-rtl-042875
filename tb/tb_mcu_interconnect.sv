// Testbench of mcu_interconnect: nine masters issue random reads and writes
// (each to its own set of addresses, so every master's reference is exact)
// to the interleaved region, the private region, the ROM and an unmapped
// address, with targets that stall at random. Checks every read value,
// that writes land in the bank given by address bits [3:2] at word
// offset >> 4, that the core's instruction and data masters reach their own
// private ports and the others the system port, that unmapped reads return
// 0, and that round robin lets no master wait more than a bounded time.
// Counts cycles in which several masters competed for one bank.
module tb_mcu_interconnect;
  import quentin_pkg::*;
  localparam int NM = 9;
  logic clk = 0, rst_n = 0;
  mem_req_t [NM-1:0] m_req;
  mem_rsp_t [NM-1:0] m_rsp;
  mem_req_t [3:0] bank_req;
  mem_rsp_t [3:0] bank_rsp;
  mem_req_t [2:0] priv_req;
  mem_rsp_t [2:0] priv_rsp;
  mem_req_t rom_req;
  mem_rsp_t rom_rsp;
  int checks = 0, failures = 0, conflicts = 0, max_wait = 0;
  logic [31:0] refv_all [NM][2][64];

  mcu_interconnect #(.NM(NM)) dut (.clk_i(clk), .rst_ni(rst_n), .m_req, .m_rsp, .bank_req, .bank_rsp,
                                   .priv_req, .priv_rsp, .rom_req, .rom_rsp);

  for (genvar b = 0; b < 4; b++) begin : g_b
    tb_target #(.WORDS(32768), .STALL_PCT(10)) i_t (.clk_i(clk), .req(bank_req[b]), .rsp(bank_rsp[b]));
  end
  for (genvar p = 0; p < 3; p++) begin : g_p
    tb_target #(.WORDS(16384), .STALL_PCT(20)) i_t (.clk_i(clk), .req(priv_req[p]), .rsp(priv_rsp[p]));
  end
  tb_target #(.WORDS(2048), .STALL_PCT(0)) i_rom (.clk_i(clk), .req(rom_req), .rsp(rom_rsp));

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    for (int b = 0; b < 4; b++) begin
      int n = 0;
      for (int m = 0; m < NM; m++)
        if (m_req[m].req && m_req[m].addr >= L2_IL_BASE && m_req[m].addr < L2_IL_BASE + L2_IL_BYTES
            && m_req[m].addr[3:2] == 2'(b)) n++;
      if (n > 1) conflicts++;
    end
  end

  // per-master address: interleaved region word (m + 16*k), private word (64*m + k)
  function automatic logic [31:0] gen_addr(input int m, input int kind, input int k);
    case (kind)
      0: return L2_IL_BASE + 32'(4 * (m + 16 * k));
      1: return L2_PRIV_BASE + 32'(4 * (64 * m + k));
      2: return ROM_BASE + 32'(4 * k);
      default: return 32'h3000_0000;
    endcase
  endfunction

  for (genvar gm = 0; gm < NM; gm++) begin : g_m
    initial begin
      logic [31:0] refv [4][64];
      for (int kind = 0; kind < 2; kind++) for (int k = 0; k < 64; k++) begin
        refv[kind][k] = 32'(gm * 1000 + kind * 100 + k);
        refv_all[gm][kind][k] = refv[kind][k];
      end
      m_req[gm] = '0;
      @(posedge rst_n);
      // fill own words
      for (int kind = 0; kind < 2; kind++)
        for (int k = 0; k < 64; k++) begin
          @(negedge clk);
          m_req[gm].req = 1; m_req[gm].we = 1; m_req[gm].be = 4'hF;
          m_req[gm].addr = gen_addr(gm, kind, k); m_req[gm].wdata = refv[kind][k];
          #1;
          while (!m_rsp[gm].gnt) begin @(negedge clk); #1; end
          @(negedge clk); m_req[gm] = '0;
        end
      for (int t = 0; t < 1500; t++) begin
        int kind, k, wait_c;
        bit w;
        logic [31:0] exp;
        kind = int'($urandom % 8);
        kind = (kind < 4) ? 0 : (kind < 6) ? 1 : (kind < 7) ? 2 : 3;
        k = int'($urandom % 64);
        w = (kind < 2) && ($urandom % 3 == 0);
        @(negedge clk);
        m_req[gm].req = 1; m_req[gm].we = w; m_req[gm].be = 4'hF;
        m_req[gm].addr = gen_addr(gm, kind, k); m_req[gm].wdata = $urandom;
        if (w) refv[kind][k] = m_req[gm].wdata;
        if (kind < 2) refv_all[gm][kind][k] = refv[kind][k];
        exp = (kind < 2) ? refv[kind][k] : (kind == 2) ? i_rom.mem[k] : 32'd0;
        wait_c = 0;
        #1;
        while (!m_rsp[gm].gnt) begin @(negedge clk); wait_c++; #1; end
        if (wait_c > max_wait) max_wait = wait_c;
        @(negedge clk);
        m_req[gm] = '0;
        if (!w) begin
          checks++;
          if (!m_rsp[gm].rvalid || m_rsp[gm].rdata !== exp) begin
            failures++;
            if (failures < 10) $display("FAIL master %0d kind %0d k %0d got %h exp %h", gm, kind, k, m_rsp[gm].rdata, exp);
          end
        end
      end
    end
  end

  initial begin
    for (int k = 0; k < 2048; k++) i_rom.mem[k] = $urandom;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (40000) @(posedge clk);
    // placement checks through the target models
    for (int m = 0; m < NM; m++) begin
      for (int k = 0; k < 64; k++) begin
        int wi;
        logic [31:0] got, gotp;
        wi = m + 16 * k;
        case (wi % 4)
          0: got = g_b[0].i_t.mem[wi / 4];
          1: got = g_b[1].i_t.mem[wi / 4];
          2: got = g_b[2].i_t.mem[wi / 4];
          default: got = g_b[3].i_t.mem[wi / 4];
        endcase
        case (m)
          0: gotp = g_p[0].i_t.mem[64 * m + k];
          1: gotp = g_p[1].i_t.mem[64 * m + k];
          default: gotp = g_p[2].i_t.mem[64 * m + k];
        endcase
        checks += 2;
        if (got !== refv_all[m][0][k]) begin failures++; if (failures < 10) $display("FAIL bank placement m%0d k%0d", m, k); end
        if (gotp !== refv_all[m][1][k]) begin failures++; if (failures < 10) $display("FAIL private placement m%0d k%0d", m, k); end
      end
      // private: instruction master 0 -> port 0, data master 1 -> port 1, others -> port 2
      checks++;
      case (m)
        0: if (g_p[0].i_t.served == 0) begin failures++; $display("FAIL instr port unused"); end
        1: if (g_p[1].i_t.served == 0) begin failures++; $display("FAIL data port unused"); end
        default: if (g_p[2].i_t.served == 0) begin failures++; $display("FAIL system port unused"); end
      endcase
    end
    checks++;
    if (g_p[0].i_t.served > 200 + 64 * 2 + 1500) begin failures++; $display("FAIL instr port overused"); end
    checks++;
    if (conflicts == 0) begin failures++; $display("FAIL no bank conflicts happened"); end
    checks++;
    if (max_wait > 40) begin failures++; $display("FAIL starvation %0d", max_wait); end
    $display("bank conflict cycles %0d, longest wait %0d", conflicts, max_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

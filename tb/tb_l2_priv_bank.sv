// Testbench of l2_priv_bank: random concurrent traffic on the instruction
// (read only), data and system ports over the SCM and both SRAM cuts,
// following the request/grant protocol, against a reference array. Checks
// every read value, that SCM requests are never stalled, that SRAM
// conflicts stall the lower-priority port (and count that they happened),
// and that the SCM stays error free when the SRAM bit-error rate is raised.
module tb_l2_priv_bank;
  import quentin_pkg::*;
  localparam int WORDS = 2048 + 6144 + 8192;
  logic clk = 0, rst_n = 0;
  mem_req_t [2:0] req;
  mem_rsp_t [2:0] rsp;
  logic [31:0] ber = 0;
  logic [31:0] ref_mem [WORDS];
  int checks = 0, failures = 0, sram_stalls = 0, scm_stalls = 0;

  l2_priv_bank dut (.clk_i(clk), .rst_ni(rst_n), .req, .rsp, .ber);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pick_addr();
    case ($urandom % 3)
      0: return int'($urandom % 32);                 // SCM
      1: return 2048 + int'($urandom % 32);          // 24 KB cut
      default: return 8192 + int'($urandom % 32);    // 32 KB cut
    endcase
  endfunction

  initial begin
    logic [31:0] exp_d [3];
    bit          exp_v [3];
    bit          granted [3];
    req = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // initialise everything through the data port
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk);
      req[1] = '0; req[1].req = 1; req[1].we = 1; req[1].be = 4'hF; req[1].addr = 32'(a);
      req[1].wdata = $urandom; ref_mem[a] = req[1].wdata;
    end
    @(negedge clk); req = '0;
    for (int t = 0; t < 6000; t++) begin
      // new requests on idle ports
      for (int p = 0; p < 3; p++)
        if (!req[p].req && ($urandom % 4 != 0)) begin
          req[p].req   = 1;
          req[p].we    = (p != 0) && ($urandom % 3 == 0);
          req[p].be    = 4'($urandom) | 4'b0001;
          req[p].addr  = 32'(pick_addr());
          req[p].wdata = $urandom;
        end
      #1;
      for (int p = 0; p < 3; p++) begin
        granted[p] = req[p].req && rsp[p].gnt;
        exp_v[p] = granted[p] && !req[p].we;
        exp_d[p] = ref_mem[req[p].addr];
        if (req[p].req && !rsp[p].gnt) begin
          if (req[p].addr < 2048) scm_stalls++; else sram_stalls++;
        end
      end
      @(posedge clk);
      for (int p = 1; p < 3; p++)
        if (req[p].req && rsp[p].gnt && req[p].we)
          for (int b = 0; b < 4; b++) if (req[p].be[b]) ref_mem[req[p].addr][8*b +: 8] = req[p].wdata[8*b +: 8];
      @(negedge clk);
      for (int p = 0; p < 3; p++) begin
        if (exp_v[p]) begin
          checks++;
          if (!rsp[p].rvalid || rsp[p].rdata !== exp_d[p]) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d port %0d got %h exp %h", t, p, rsp[p].rdata, exp_d[p]);
          end
        end
      end
      // drop granted requests (their grant was sampled before the edge)
      for (int p = 0; p < 3; p++) if (granted[p]) req[p].req = 0;
    end
    checks++;
    if (scm_stalls != 0) begin failures++; $display("FAIL SCM stalled %0d times", scm_stalls); end
    checks++;
    if (sram_stalls == 0) begin failures++; $display("FAIL no SRAM conflict seen"); end
    $display("SRAM conflict stalls: %0d", sram_stalls);
    // SCM stays exact at a high SRAM error rate
    req = '0; ber = 32'd429496730;   // 1e-1
    for (int a = 0; a < 64; a++) begin
      @(negedge clk); req[0] = '0; req[0].req = 1; req[0].addr = 32'(a); req[0].be = 4'hF;
      @(negedge clk); req[0] = '0;
      checks++;
      if (rsp[0].rdata !== ref_mem[a]) begin failures++; $display("FAIL SCM error at %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

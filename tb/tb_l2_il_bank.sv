// Testbench of l2_il_bank: fills every word of the bank (SCM and the four
// SRAM cuts), reads it back with ber = 0, checks grant and one-cycle rvalid,
// then raises the SRAM bit-error rate and checks that words in the SCM
// region still read back exactly while the SRAM region shows errors.
module tb_l2_il_bank;
  import quentin_pkg::*;
  localparam int WORDS = 512 + 4 * 7168;
  logic clk = 0, rst_n = 0;
  mem_req_t req;
  mem_rsp_t rsp;
  logic [31:0] ber = 0;
  logic [31:0] ref_mem [WORDS];
  int checks = 0, failures = 0;

  l2_il_bank dut (.clk_i(clk), .rst_ni(rst_n), .req, .rsp, .ber);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic access(input bit w, input int a, input logic [31:0] d, output logic [31:0] q);
    @(negedge clk);
    req = '0; req.req = 1; req.we = w; req.be = 4'hF; req.addr = 32'(a); req.wdata = d;
    #1;
    checks++;
    if (!rsp.gnt) begin failures++; $display("FAIL no grant"); end
    @(negedge clk); req = '0;
    checks++;
    if (!rsp.rvalid) begin failures++; $display("FAIL no rvalid"); end
    q = rsp.rdata;
  endtask

  initial begin
    logic [31:0] q;
    int scm_err, sram_err;
    req = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int a = 0; a < WORDS; a++) begin
      ref_mem[a] = $urandom;
      access(1, a, ref_mem[a], q);
    end
    for (int t = 0; t < 4000; t++) begin
      int a;
      a = (t < 16) ? ((t % 2 == 0) ? 511 + t / 2 : 512 + 7168 * (t / 4) - 1 + (t % 4)) : int'($urandom % WORDS);
      if (a >= WORDS) a = WORDS - 1;
      access(0, a, 0, q);
      checks++;
      if (q !== ref_mem[a]) begin failures++; if (failures < 10) $display("FAIL word %0d got %h exp %h", a, q, ref_mem[a]); end
    end
    ber = 32'd42949673;   // 1e-2 per bit
    scm_err = 0; sram_err = 0;
    for (int a = 0; a < 512; a++) begin access(0, a, 0, q); scm_err += $countones(q ^ ref_mem[a]); end
    for (int a = 512; a < 1024 + 512; a++) begin access(0, a, 0, q); sram_err += $countones(q ^ ref_mem[a]); end
    checks++;
    if (scm_err != 0) begin failures++; $display("FAIL SCM errors %0d", scm_err); end
    checks++;
    if (sram_err < 100) begin failures++; $display("FAIL SRAM errors %0d", sram_err); end
    $display("SCM bit errors %0d, SRAM bit errors %0d in 32768 bits", scm_err, sram_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench of the sram_cut model: with ber = 0 every word reads back as
// written (byte enables included, one-cycle latency); with ber = 2^32/100
// the measured read bit-error rate lies within 0.6 % .. 1.4 %, and with
// ber = 2^32/1000 within 0.05 % .. 0.15 %, the way the paper measures BER
// by comparing read data with the written pattern.
module tb_sram_cut;
  localparam int WORDS = 7168, AW = 13;
  logic clk = 0, rst_n = 0, req = 0, we = 0;
  logic [3:0] be = '0;
  logic [AW-1:0] addr = '0;
  logic [31:0] wdata = '0, rdata, ber = '0;
  logic [31:0] ref_mem [WORDS];
  int checks = 0, failures = 0;

  sram_cut #(.WORDS(WORDS)) dut (.clk_i(clk), .rst_ni(rst_n), .req, .we, .be, .addr, .wdata, .rdata, .ber);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_all();
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk); req = 1; we = 1; be = 4'hF; addr = AW'(a); wdata = $urandom; ref_mem[a] = wdata;
    end
    @(negedge clk); req = 0; we = 0;
  endtask

  task automatic read_all(output int errs);
    errs = 0;
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk); req = 1; we = 0; addr = AW'(a);
      @(negedge clk); req = 0;
      errs += $countones(rdata ^ ref_mem[a]);
    end
  endtask

  initial begin
    int e;
    repeat (2) @(posedge clk); rst_n = 1;
    write_all();
    // partial write
    @(negedge clk); req = 1; we = 1; be = 4'b0101; addr = 5; wdata = 32'hDEAD_BEEF;
    ref_mem[5][7:0] = 8'hEF; ref_mem[5][23:16] = 8'hAD;
    @(negedge clk); req = 0; we = 0;
    ber = 0;
    read_all(e);
    checks++;
    if (e != 0) begin failures++; $display("FAIL %0d bit errors at ber 0", e); end
    ber = 32'd42949673;   // 1e-2
    read_all(e);
    checks++;
    $display("ber 1e-2: %0d errors in %0d bits", e, WORDS * 32);
    if (e < WORDS * 32 * 6 / 1000 || e > WORDS * 32 * 14 / 1000) begin failures++; $display("FAIL ber 1e-2"); end
    ber = 32'd4294967;    // 1e-3
    read_all(e);
    checks++;
    $display("ber 1e-3: %0d errors in %0d bits", e, WORDS * 32);
    if (e < WORDS * 32 * 5 / 10000 || e > WORDS * 32 * 15 / 10000) begin failures++; $display("FAIL ber 1e-3"); end
    // errors are not stored: back at ber 0 the data is intact
    ber = 0;
    read_all(e);
    checks++;
    if (e != 0) begin failures++; $display("FAIL stored errors %0d", e); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

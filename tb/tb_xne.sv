// End-to-end testbench of the XNE (controller, loop sequencer, streamer,
// datapath) against tb_mem4. The testbench fills memory with random inputs
// and weights and with thresholds near the expected mean, programs a layer
// over the APB slave, waits for the done event and compares every output
// bit with a reference convolution computed here from the same memory.
// Layers: a 3x3 convolution 128 -> 128 channels; a 3x3 convolution 200 ->
// 160 channels (two partial channel groups each way) with random memory
// stalls; a fully connected 384 -> 10 layer. Also checks that weights stream
// at one 128-bit word per cycle: the job takes at most a few cycles per
// input and output word more than the number of weight beats.
module tb_xne;
  import quentin_pkg::*;
  import xne_pkg::*;
  localparam logic [31:0] BASE = 32'h1C01_0000;
  localparam logic [31:0] XB = BASE, WB = BASE + 32'h1_0000, TB = BASE + 32'h3_0000, YB = BASE + 32'h3_8000;
  logic clk = 0, rst_n = 0, stall_en = 0;
  logic psel = 0, penable = 0, pwrite = 0;
  logic [11:0] paddr = 0;
  logic [31:0] pwdata = 0, prdata;
  logic pready, evt_done;
  mem_req_t [3:0] mreq;
  mem_rsp_t [3:0] mrsp;
  int checks = 0, failures = 0;
  int wbeats = 0;

  xne dut (.clk_i(clk), .rst_ni(rst_n), .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready,
           .mem_req(mreq), .mem_rsp(mrsp), .evt_done);
  tb_mem4 #(.NP(4), .WORDS(65536), .BASE(BASE), .STALL_PCT(20)) i_mem (.clk_i(clk), .req(mreq), .rsp(mrsp), .stall_en);

  always #5 clk = ~clk;
  always @(posedge clk) if (dut.w_valid && !dut.thr_phase) wbeats++;

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apb_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); psel = 1; pwrite = 1; paddr = 12'(a); pwdata = d; penable = 0;
    @(negedge clk); penable = 1;
    @(negedge clk); psel = 0; penable = 0; pwrite = 0;
  endtask

  function automatic bit mbit(input logic [31:0] byte_addr, input int c);
    int unsigned wi;
    wi = ((byte_addr - BASE) >> 2) + c / 32;
    return i_mem.mem[wi][c % 32];
  endfunction

  task automatic run_layer(input int oh, input int ow, input int fh, input int fw, input int nki,
                           input int nko, input int sh, input bit stalls);
    int kim_n, kom_n, inw, inh, cyc0, cyc1, beats0, words_in, words_out;
    kim_n = (nki + 127) / 128; kom_n = (nko + 127) / 128;
    inw = ow + fw - 1; inh = oh + fh - 1;
    for (int k = 0; k < 65536; k++) i_mem.mem[k] = $urandom;
    for (int ko = 0; ko < nko; ko++) begin
      int t;
      t = ((fh * fw * nki / 2) >> sh) + int'($urandom % 7) - 3;
      if (t < 0) t = 0;
      if (t > 255) t = 255;
      i_mem.mem[((TB - BASE) >> 2) + ko / 4][8 * (ko % 4) +: 8] = 8'(t);
    end
    stall_en = stalls;
    apb_write(REG_X_BASE, XB);
    apb_write(REG_W_BASE, WB);
    apb_write(REG_Y_BASE, YB);
    apb_write(REG_THR_BASE, TB);
    apb_write(REG_OUT_HW, {16'(oh), 16'(ow)});
    apb_write(REG_FILTER, {24'd0, 4'(fh), 4'(fw)});
    apb_write(REG_CHANNELS, {16'(nko), 16'(nki)});
    apb_write(REG_SHIFT, 32'(sh));
    beats0 = wbeats;
    cyc0 = $time / 10;
    apb_write(REG_TRIGGER, 0);
    while (!evt_done) @(posedge clk);
    cyc1 = $time / 10;
    @(negedge clk);
    // reference
    for (int i = 0; i < oh; i++)
      for (int j = 0; j < ow; j++)
        for (int ko = 0; ko < kom_n * 128; ko++) begin
          int acc, thr;
          bit e, got;
          acc = 0;
          if (ko < nko) begin
            for (int ui = 0; ui < fh; ui++)
              for (int uj = 0; uj < fw; uj++)
                for (int ki = 0; ki < nki; ki++) begin
                  bit xb, wbit;
                  xb   = mbit(XB + 32'(16 * (((i + ui) * inw + (j + uj)) * kim_n + ki / 128)), ki % 128);
                  wbit = mbit(WB + 32'(16 * (((((ko / 128) * fh + ui) * fw + uj) * kim_n + ki / 128) * 128 + ko % 128)), ki % 128);
                  if (xb == wbit) acc++;
                end
            thr = int'(i_mem.mem[((TB - BASE) >> 2) + ko / 4][8 * (ko % 4) +: 8]) << sh;
            e = !(acc < thr);
          end else e = 0;
          got = mbit(YB + 32'(16 * ((i * ow + j) * kom_n + ko / 128)), ko % 128);
          checks++;
          if (got !== e) begin
            failures++;
            if (failures < 10) $display("FAIL y[%0d,%0d,%0d] got %b exp %b (acc %0d)", i, j, ko, got, e, acc);
          end
        end
    // rate: every weight beat is one cycle; overhead bounded per word
    words_in  = oh * ow * kom_n * fh * fw * kim_n;
    words_out = oh * ow * kom_n;
    checks++;
    if (wbeats - beats0 != oh * ow * fh * fw * kim_n * nko) begin
      failures++; $display("FAIL weight beats %0d", wbeats - beats0);
    end
    if (!stalls) begin
      checks++;
      if (cyc1 - cyc0 > (wbeats - beats0) + 6 * words_in + 16 * words_out + 8) begin
        failures++; $display("FAIL too slow: %0d cycles for %0d beats", cyc1 - cyc0, wbeats - beats0);
      end
    end
    $display("layer %0dx%0d f%0dx%0d %0d->%0d: %0d cycles, %0d weight beats", oh, ow, fh, fw, nki, nko,
             cyc1 - cyc0, wbeats - beats0);
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    run_layer(3, 3, 3, 3, 128, 128, 3, 0);
    run_layer(2, 2, 3, 3, 200, 160, 2, 1);
    run_layer(1, 1, 1, 1, 384, 10, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench of xne_regfile: APB writes and read-back of every configuration
// register, the start pulse and job id of a trigger, a trigger ignored while
// busy, and the busy/done status bits.
module tb_xne_regfile;
  import xne_pkg::*;
  logic clk = 0, rst_n = 0;
  logic psel = 0, penable = 0, pwrite = 0;
  logic [11:0] paddr = 0;
  logic [31:0] pwdata = 0, prdata;
  logic pready, start, busy = 0, done = 0;
  xne_cfg_t cfg;
  int checks = 0, failures = 0, starts = 0;

  xne_regfile dut (.clk_i(clk), .rst_ni(rst_n), .psel, .penable, .pwrite, .paddr, .pwdata, .prdata,
                   .pready, .cfg, .start, .busy, .done);

  always #5 clk = ~clk;
  always @(posedge clk) if (start) starts++;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apb_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); psel = 1; pwrite = 1; paddr = 12'(a); pwdata = d; penable = 0;
    @(negedge clk); penable = 1;
    @(negedge clk); psel = 0; penable = 0; pwrite = 0;
  endtask
  task automatic apb_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); psel = 1; pwrite = 0; paddr = 12'(a); penable = 0;
    @(negedge clk); penable = 1; #1 d = prdata;
    @(negedge clk); psel = 0; penable = 0;
  endtask
  task automatic expect_eq(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] d;
    repeat (2) @(posedge clk); rst_n = 1;
    apb_write(REG_X_BASE, 32'h1C01_0100);
    apb_write(REG_W_BASE, 32'h1C02_0000);
    apb_write(REG_Y_BASE, 32'h1C03_0000);
    apb_write(REG_THR_BASE, 32'h1C01_0000);
    apb_write(REG_OUT_HW, {16'd6, 16'd7});
    apb_write(REG_FILTER, 32'h31);   // fh = 3, fw = 1
    apb_write(REG_CHANNELS, {16'd256, 16'd384});
    apb_write(REG_SHIFT, 32'd3);
    apb_read(REG_X_BASE, d);   expect_eq("x_base", d, 32'h1C01_0100);
    apb_read(REG_W_BASE, d);   expect_eq("w_base", d, 32'h1C02_0000);
    apb_read(REG_Y_BASE, d);   expect_eq("y_base", d, 32'h1C03_0000);
    apb_read(REG_THR_BASE, d); expect_eq("thr_base", d, 32'h1C01_0000);
    apb_read(REG_OUT_HW, d);   expect_eq("out_hw", d, {16'd6, 16'd7});
    apb_read(REG_FILTER, d);   expect_eq("filter", d, 32'h31);
    apb_read(REG_CHANNELS, d); expect_eq("channels", d, {16'd256, 16'd384});
    apb_read(REG_SHIFT, d);    expect_eq("shift", d, 32'd3);
    expect_eq("cfg.out_h", 32'(cfg.out_h), 6);
    expect_eq("cfg.fh", 32'(cfg.fh), 3);
    expect_eq("cfg.fw", 32'(cfg.fw), 1);
    expect_eq("cfg.n_ki", 32'(cfg.n_ki), 384);
    expect_eq("cfg.n_ko", 32'(cfg.n_ko), 256);
    apb_read(REG_JOB_ID, d);   expect_eq("job id 0", d, 0);
    apb_write(REG_TRIGGER, 0); @(posedge clk); #1;
    expect_eq("one start", 32'(starts), 1);
    busy = 1;
    apb_read(REG_STATUS, d);   expect_eq("status busy", d, 1);
    apb_read(REG_JOB_ID, d);   expect_eq("job id 1", d, 1);
    apb_write(REG_TRIGGER, 0); @(posedge clk); #1;  // ignored while busy
    expect_eq("no start while busy", 32'(starts), 1);
    @(negedge clk); busy = 0; done = 1; @(negedge clk); done = 0;
    apb_read(REG_STATUS, d);   expect_eq("status done", d, 2);
    apb_write(REG_TRIGGER, 0); @(posedge clk); #1;
    expect_eq("second start", 32'(starts), 2);
    apb_read(REG_JOB_ID, d);   expect_eq("job id 2", d, 2);
    apb_read(REG_STATUS, d);   expect_eq("done cleared", d, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

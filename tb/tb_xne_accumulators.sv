// Testbench of xne_accumulators: random accumulate/clear sequence checked
// against a reference array kept in the testbench, including 16-bit wrap.
module tb_xne_accumulators;
  localparam int N = 128;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [6:0] idx = 0;
  logic [7:0] popcnt = 0;
  logic [N-1:0][15:0] acc;
  int ref_acc [N];
  int checks = 0, failures = 0;

  xne_accumulators #(.N(N), .ACC_W(16)) dut (.clk_i(clk), .rst_ni(rst_n), .clr, .en, .idx, .popcnt, .acc);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (ref_acc[k]) ref_acc[k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      clr    = ($urandom % 400) == 0;
      en     = ($urandom % 4) != 0;
      idx    = 7'($urandom);
      popcnt = 8'($urandom % 129);
      @(posedge clk);
      if (clr) foreach (ref_acc[k]) ref_acc[k] = 0;
      else if (en) ref_acc[idx] = (ref_acc[idx] + popcnt) % 65536;
      #1;
      for (int k = 0; k < N; k++) begin
        checks++;
        if (int'(acc[k]) != ref_acc[k]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d acc[%0d]=%0d exp %0d", t, k, acc[k], ref_acc[k]);
        end
      end
    end
    // wrap-around: push one register past 65535
    @(negedge clk); clr = 1; en = 0; @(posedge clk); #1;
    @(negedge clk); clr = 0; en = 1; idx = 5; popcnt = 128;
    repeat (513) @(posedge clk);
    #1; en = 0;
    checks++;
    if (acc[5] != 16'(513 * 128)) begin failures++; $display("FAIL wrap %0d", acc[5]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench of xne_datapath: computes one 128 x 128 binary matrix-vector
// product over several input words (as for a 3x3 filter), thresholds it and
// compares all 128 output bits with a reference computed in the testbench.
// Also checks that a narrow layer (ki_mask / ko_mask) masks channels, and
// that the 128 weight beats are absorbed in 128 consecutive cycles.
module tb_xne_datapath;
  localparam int N = 128;
  logic clk = 0, rst_n = 0;
  logic x_valid = 0, acc_clr = 0, w_valid = 0, thr_valid = 0;
  logic [N-1:0] x_data = '0, w_data = '0, thr_data = '0, ki_mask = '1, ko_mask = '1, y;
  logic [6:0] ko_idx = 0;
  logic [2:0] thr_idx = 0;
  logic [3:0] thr_shift = 0;
  int checks = 0, failures = 0;

  xne_datapath #(.N(N)) dut (.clk_i(clk), .rst_ni(rst_n), .x_valid, .x_data, .ki_mask, .acc_clr,
    .w_valid, .w_data, .ko_idx, .thr_valid, .thr_idx, .thr_data, .thr_shift, .ko_mask, .y);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N-1:0] xs [9];
  logic [N-1:0] ws [9][N];
  logic [7:0]   th [N];

  task automatic run(input int passes, input int nki, input int nko, input int sh);
    int accr [N];
    int cyc0, cyc1;
    for (int k = 0; k < N; k++) accr[k] = 0;
    for (int p = 0; p < passes; p++) begin
      xs[p] = {$urandom, $urandom, $urandom, $urandom};
      for (int k = 0; k < N; k++) ws[p][k] = {$urandom, $urandom, $urandom, $urandom};
    end
    for (int k = 0; k < N; k++) begin
      for (int p = 0; p < passes; p++)
        for (int c = 0; c < nki; c++) accr[k] += (xs[p][c] == ws[p][k][c]) ? 1 : 0;
      th[k] = 8'(((passes * nki / 2) >> sh) + int'($urandom % 5) - 2);
    end
    @(negedge clk);
    acc_clr = 1; thr_shift = 4'(sh);
    ki_mask = {N{1'b1}} >> (N - nki);
    ko_mask = {N{1'b1}} >> (N - nko);
    @(negedge clk); acc_clr = 0;
    for (int b = 0; b < 8; b++) begin
      thr_valid = 1; thr_idx = 3'(b);
      for (int q = 0; q < 16; q++) thr_data[8*q +: 8] = th[16*b + q];
      @(negedge clk);
    end
    thr_valid = 0;
    cyc0 = $time;
    for (int p = 0; p < passes; p++) begin
      x_valid = 1; x_data = xs[p]; @(negedge clk); x_valid = 0;
      for (int k = 0; k < nko; k++) begin
        w_valid = 1; ko_idx = 7'(k); w_data = ws[p][k]; @(negedge clk);
      end
      w_valid = 0;
    end
    cyc1 = $time;
    checks++;
    if ((cyc1 - cyc0) / 10 != passes * (nko + 1)) begin
      failures++; $display("FAIL cycles %0d", (cyc1 - cyc0) / 10);
    end
    for (int k = 0; k < N; k++) begin
      logic e;
      e = (k < nko) && !(accr[k] < (int'(th[k]) << sh));
      checks++;
      if (y[k] !== e) begin
        failures++;
        if (failures < 10) $display("FAIL ch %0d acc %0d thr %0d y %b", k, accr[k], th[k], y[k]);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(9, 128, 128, 3);
    run(1, 128, 128, 0);
    run(9, 64, 100, 2);
    run(4, 17, 128, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

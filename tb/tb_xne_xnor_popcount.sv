// Testbench of xne_xnor_popcount: random and corner vectors; the expected
// count is computed bit by bit in the testbench (number of equal, unmasked
// bit pairs).
module tb_xne_xnor_popcount;
  localparam int N = 128;
  logic [N-1:0] x, w, mask;
  logic [7:0]   popcnt;
  int checks = 0, failures = 0;

  xne_xnor_popcount #(.N(N)) dut (.x, .w, .mask, .popcnt);

  task automatic check();
    int exp = 0;
    #1;
    for (int k = 0; k < N; k++) if (mask[k] && (x[k] == w[k])) exp++;
    checks++;
    if (int'(popcnt) != exp) begin
      failures++;
      $display("FAIL x=%h w=%h mask=%h got %0d exp %0d", x, w, mask, popcnt, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x = '0; w = '0; mask = '1; check();            // all match: 128
    x = '1; w = '0; mask = '1; check();            // none match: 0
    x = '1; w = '1; mask = '0; check();            // all masked
    for (int t = 0; t < 500; t++) begin
      x    = {$urandom, $urandom, $urandom, $urandom};
      w    = {$urandom, $urandom, $urandom, $urandom};
      mask = (t % 3 == 0) ? ({N{1'b1}} >> ($urandom % N)) : '1;
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

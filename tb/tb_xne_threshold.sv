// Testbench of xne_threshold: random accumulators, thresholds and shifts,
// plus the equality corner (acc == thr << shift gives 1); expected bits
// computed with integer arithmetic in the testbench.
module tb_xne_threshold;
  localparam int N = 128;
  logic [N-1:0][15:0] acc;
  logic [N-1:0][7:0]  thr;
  logic [3:0]         shift;
  logic [N-1:0]       y;
  int checks = 0, failures = 0;

  xne_threshold #(.N(N)) dut (.acc, .thr, .shift, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      shift = 4'($urandom % 10);
      for (int k = 0; k < N; k++) begin
        thr[k] = 8'($urandom);
        case ($urandom % 3)
          0: acc[k] = 16'($urandom);
          1: acc[k] = 16'((int'(thr[k]) << shift) & 16'hFFFF);   // equal (when no wrap)
          default: acc[k] = 16'(((int'(thr[k]) << shift) + int'($urandom % 9) - 4) & 16'hFFFF);
        endcase
      end
      #1;
      for (int k = 0; k < N; k++) begin
        int t_s;
        logic e;
        t_s = int'(thr[k]) << shift;
        e = (int'(acc[k]) < t_s) ? 1'b0 : 1'b1;
        checks++;
        if (y[k] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL acc=%0d thr=%0d sh=%0d y=%b", acc[k], thr[k], shift, y[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

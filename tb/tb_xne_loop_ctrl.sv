// Testbench of xne_loop_ctrl: steps the sequencer through whole layers and
// compares every address, mask and flag with the same loop nest written
// directly in the testbench.
module tb_xne_loop_ctrl;
  import xne_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, next = 0;
  xne_cfg_t cfg;
  logic [31:0] x_addr, w_addr, thr_addr, y_addr;
  logic [XNE_N-1:0] ki_mask, ko_mask;
  logic [7:0] n_ko_cur;
  logic first_inner, last_inner, last;
  int checks = 0, failures = 0;

  xne_loop_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .cfg, .clr, .next, .x_addr, .w_addr, .thr_addr,
                     .y_addr, .ki_mask, .ko_mask, .n_ko_cur, .first_inner, .last_inner, .last);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0h exp %0h", what, got, exp);
    end
  endtask

  task automatic run_layer(input int oh, input int ow, input int fh, input int fw, input int nki, input int nko);
    int kim_n, kom_n, inw;
    cfg = '0;
    cfg.x_base = 32'h1000_0000; cfg.w_base = 32'h2000_0000; cfg.y_base = 32'h3000_0000; cfg.thr_base = 32'h4000_0000;
    cfg.out_h = 16'(oh); cfg.out_w = 16'(ow); cfg.fh = 4'(fh); cfg.fw = 4'(fw);
    cfg.n_ki = 16'(nki); cfg.n_ko = 16'(nko);
    kim_n = (nki + 127) / 128; kom_n = (nko + 127) / 128; inw = ow + fw - 1;
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int i = 0; i < oh; i++)
      for (int j = 0; j < ow; j++)
        for (int kom = 0; kom < kom_n; kom++)
          for (int ui = 0; ui < fh; ui++)
            for (int uj = 0; uj < fw; uj++)
              for (int kim = 0; kim < kim_n; kim++) begin
                int ki_rem, ko_rem;
                bit li, l;
                ki_rem = (kim == kim_n - 1) ? nki - 128 * kim : 128;
                ko_rem = (kom == kom_n - 1) ? nko - 128 * kom : 128;
                li = (ui == fh - 1) && (uj == fw - 1) && (kim == kim_n - 1);
                l  = li && (kom == kom_n - 1) && (j == ow - 1) && (i == oh - 1);
                #1;
                chk("x_addr", x_addr, 32'h1000_0000 + (((i + ui) * inw + (j + uj)) * kim_n + kim) * 16);
                chk("w_addr", w_addr, 32'h2000_0000 + ((((kom * fh + ui) * fw + uj) * kim_n + kim) * 128) * 16);
                chk("y_addr", y_addr, 32'h3000_0000 + ((i * ow + j) * kom_n + kom) * 16);
                chk("thr_addr", thr_addr, 32'h4000_0000 + kom * 128);
                chk("n_ko_cur", n_ko_cur, ko_rem);
                chk("ki_mask", $countones(ki_mask), ki_rem);
                chk("ki_mask_lsb", ki_mask[0], 1);
                chk("ko_mask", $countones(ko_mask), ko_rem);
                chk("first_inner", first_inner, (ui == 0 && uj == 0 && kim == 0));
                chk("last_inner", last_inner, li);
                chk("last", last, l);
                @(negedge clk); next = 1; @(negedge clk); next = 0;
              end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    run_layer(2, 3, 3, 3, 384, 256);
    run_layer(3, 2, 1, 1, 100, 300);
    run_layer(1, 1, 2, 3, 128, 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

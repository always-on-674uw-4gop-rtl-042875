// Testbench of scm_mem in its 3-read / 2-write configuration (private bank
// SCM): random reads and byte-masked writes on all ports against a
// reference array, read latency of one cycle, read-old-value on a same-cycle
// write, and the higher write port winning a write collision.
module tb_scm_mem;
  localparam int WORDS = 2048, NR = 3, NW = 2, AW = 11;
  logic clk = 0;
  logic [NR-1:0] re = '0;
  logic [NR-1:0][AW-1:0] raddr = '0;
  logic [NR-1:0][31:0] rdata;
  logic [NW-1:0] we = '0;
  logic [NW-1:0][AW-1:0] waddr = '0;
  logic [NW-1:0][3:0] wbe = '0;
  logic [NW-1:0][31:0] wdata = '0;
  logic [31:0] ref_mem [WORDS];
  int checks = 0, failures = 0;

  scm_mem #(.WORDS(WORDS), .NR(NR), .NW(NW)) dut (.clk_i(clk), .re, .raddr, .rdata, .we, .waddr, .wbe, .wdata);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp_r [NR];
    logic        exp_v [NR];
    // initialise through write port 0
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk);
      we = 2'b01; waddr[0] = AW'(a); wbe[0] = 4'hF; wdata[0] = $urandom; ref_mem[a] = wdata[0];
    end
    @(negedge clk); we = '0;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      for (int r = 0; r < NR; r++) begin
        re[r] = 1'($urandom % 2); raddr[r] = AW'($urandom % 64);
        exp_v[r] = re[r]; exp_r[r] = ref_mem[raddr[r]];
      end
      for (int w = 0; w < NW; w++) begin
        we[w] = ($urandom % 3) == 0; waddr[w] = AW'($urandom % 64); wbe[w] = 4'($urandom); wdata[w] = $urandom;
      end
      @(posedge clk);
      for (int w = 0; w < NW; w++)
        if (we[w]) for (int b = 0; b < 4; b++) if (wbe[w][b]) ref_mem[waddr[w]][8*b +: 8] = wdata[w][8*b +: 8];
      #1;
      for (int r = 0; r < NR; r++)
        if (exp_v[r]) begin
          checks++;
          if (rdata[r] !== exp_r[r]) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d port %0d got %h exp %h", t, r, rdata[r], exp_r[r]);
          end
        end
    end
    // collision: both write ports, same word, all bytes -> port 1 wins
    @(negedge clk); re = '0;
    we = 2'b11; waddr[0] = 7; waddr[1] = 7; wbe[0] = 4'hF; wbe[1] = 4'hF; wdata[0] = 32'hAAAA_AAAA; wdata[1] = 32'h5555_5555;
    @(negedge clk); we = '0; re[2] = 1; raddr[2] = 7;
    @(negedge clk); re = '0;
    checks++;
    if (rdata[2] !== 32'h5555_5555) begin failures++; $display("FAIL collision %h", rdata[2]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

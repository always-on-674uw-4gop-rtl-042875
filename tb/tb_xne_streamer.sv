// Testbench of xne_streamer: bursts through the input and weight load units
// and stores through the activation store unit, against tb_mem4. Checks the
// data and index of every word, the 128-bit-per-cycle rate of an unstalled
// 128-word burst (first to last word in 128 cycles), correct data under
// random per-port stalls, and that stored words land in memory.
module tb_xne_streamer;
  import quentin_pkg::*;
  localparam logic [31:0] BASE = 32'h1C01_0000;
  logic clk = 0, rst_n = 0, stall_en = 0;
  logic [1:0] sel = 0;
  logic x_start = 0, w_start = 0, st_start = 0;
  logic [31:0] x_base = 0, w_base = 0, st_addr = 0;
  logic [7:0] w_len = 0, w_idx;
  logic [127:0] x_data, w_data, st_data = 0;
  logic x_done, x_valid, w_done, w_valid, st_done;
  mem_req_t [3:0] mreq;
  mem_rsp_t [3:0] mrsp;
  int checks = 0, failures = 0;

  xne_streamer dut (.clk_i(clk), .rst_ni(rst_n), .sel, .x_start, .x_base, .x_done, .x_valid, .x_data,
    .w_start, .w_base, .w_len, .w_done, .w_valid, .w_data, .w_idx, .st_start, .st_addr, .st_data,
    .st_done, .mem_req(mreq), .mem_rsp(mrsp));
  tb_mem4 #(.NP(4), .WORDS(16384), .BASE(BASE), .STALL_PCT(30)) i_mem (.clk_i(clk), .req(mreq), .rsp(mrsp), .stall_en);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [127:0] word_at(input logic [31:0] a);
    int unsigned wi;
    wi = (a - BASE) >> 2;
    return {i_mem.mem[wi+3], i_mem.mem[wi+2], i_mem.mem[wi+1], i_mem.mem[wi]};
  endfunction

  task automatic chk(input string what, input logic [127:0] got, input logic [127:0] exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 10) $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  task automatic burst(input logic [31:0] base, input int len, input bit check_rate);
    int n = 0, first = -1, lastc = 0, cyc = 0;
    @(negedge clk); sel = 1; w_base = base; w_len = 8'(len); w_start = 1;
    @(negedge clk); w_start = 0;
    while (n < len && cyc < 5000) begin
      @(posedge clk); #1; cyc++;
      if (w_valid) begin
        chk("w_data", w_data, word_at(base + 32'(16 * int'(w_idx))));
        chk("w_idx", 128'(w_idx), 128'(n));
        if (first < 0) first = cyc;
        lastc = cyc;
        n++;
      end
    end
    @(posedge clk);
    if (n != len) $display("DBG active=%0d iss=%0d rcv=%0d len=%0d g=%b hv=%b", dut.i_weight_load.active_q, dut.i_weight_load.iss_q, dut.i_weight_load.rcv_q, dut.i_weight_load.len_q, dut.i_weight_load.g_q, dut.i_weight_load.hv_q);
    chk("burst count", 128'(n), 128'(len));
    if (check_rate) chk("128 words in 128 cycles", 128'(lastc - first + 1), 128'(len));
  endtask

  initial begin
    for (int k = 0; k < 16384; k++) i_mem.mem[k] = $urandom;
    repeat (2) @(posedge clk); rst_n = 1;
    burst(BASE + 32'h100, 128, 1);
    burst(BASE + 32'h2000, 8, 1);
    // input load unit
    @(negedge clk); sel = 0; x_base = BASE + 32'h40; x_start = 1;
    @(negedge clk); x_start = 0;
    while (!x_valid) @(posedge clk) #1;
    chk("x_data", x_data, word_at(BASE + 32'h40));
    @(posedge clk);
    // stalls
    stall_en = 1;
    burst(BASE + 32'h8000, 128, 0);
    // store
    for (int s = 0; s < 4; s++) begin
      logic [127:0] d;
      d = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk); sel = 2; st_addr = BASE + 32'h3000 + 32'(16 * s); st_data = d; st_start = 1;
      @(negedge clk); st_start = 0;
      while (!st_done) @(posedge clk) #1;
      @(negedge clk);
      chk("store", word_at(BASE + 32'h3000 + 32'(16 * s)), d);
    end
    checks++;
    if (i_mem.stalls == 0) begin failures++; $display("FAIL no stall happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

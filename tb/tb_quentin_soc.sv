// End-to-end testbench of quentin_soc at its full size (456 KB interleaved
// L2, 64 KB private L2, 128-channel XNE). The testbench plays the parts that
// live outside the subsystem: the core's data and instruction ports, the
// debug bridge, a uDMA port, the ROM, and the APB writes that program the XNE.
//
//  1. SRAM bit-error self-test: a 32-bit LFSR pattern (new seed per pass) is
//     written over all 448 KB of interleaved SRAM and read back, counting
//     differing bits; once with an ideal SRAM (expects 0 errors) and once
//     with a bit-error rate of 1e-3 (expects 0.05 % .. 0.15 %). The SCM
//     regions (8 KB interleaved, 8 KB private) are tested at a 1e-2 error
//     rate and must stay exact.
//  2. A two-layer BNN as in the runtime loop of the paper: the debug port
//     loads input, weights (SRAM) and thresholds (interleaved SCM); layer 0
//     is a 3x3 convolution 128 -> 128 channels on a 6x6 input, layer 1 a
//     fully connected 2048 -> 10 layer reading layer 0's output. While the
//     XNE runs, the core data port and the uDMA port hammer the interleaved
//     banks and the core instruction port fetches from the private bank.
//     Outputs are compared bit by bit with a reference computed here.
//     Layer 0 is also run alone on a quiet bus and must finish within 8 %
//     of one 128-bit weight word per cycle (the XNE peak rate). The same
//     network is then run with a 1e-2 SRAM error rate and the number of
//     output bits that differ is reported.
// Mechanisms counted (each must happen): XNE jobs, XNE port stalls caused by
// bank conflicts, private-bank SRAM conflicts, SRAM bit errors, ROM reads,
// unmapped reads, partial output-channel groups, multi-group input channels.
module tb_quentin_soc;
  import quentin_pkg::*;
  import xne_pkg::*;

  logic clk = 0, rst_n = 0;
  mem_req_t fc_instr_req, fc_data_req, dbg_req, rom_req;
  mem_rsp_t fc_instr_rsp, fc_data_rsp, dbg_rsp, rom_rsp;
  mem_req_t [1:0] udma_req;
  mem_rsp_t [1:0] udma_rsp;
  logic psel = 0, penable = 0, pwrite = 0;
  logic [11:0] paddr = 0;
  logic [31:0] pwdata = 0, prdata;
  logic pready, evt_done;
  logic [31:0] sram_ber = 0;
  int checks = 0, failures = 0;
  bit traffic_on = 0;

  // mechanism counters
  int n_jobs = 0, n_xne_stall = 0, n_priv_conflict = 0, n_rom = 0, n_unmapped = 0;
  int n_bit_err = 0, n_partial_ko = 0, n_multi_ki = 0;
  int last_cycles = 0;

  quentin_soc dut (
    .clk_i(clk), .rst_ni(rst_n),
    .fc_instr_req, .fc_instr_rsp, .fc_data_req, .fc_data_rsp,
    .udma_req, .udma_rsp, .dbg_req, .dbg_rsp,
    .rom_req, .rom_rsp,
    .xne_psel(psel), .xne_penable(penable), .xne_pwrite(pwrite), .xne_paddr(paddr),
    .xne_pwdata(pwdata), .xne_prdata(prdata), .xne_pready(pready), .xne_evt_done(evt_done),
    .sram_ber
  );

  always #5 clk = ~clk;

  // ROM model: word k holds k ^ 0xB007_C0DE
  assign rom_rsp.gnt = rom_req.req;
  always_ff @(posedge clk) begin
    rom_rsp.rvalid <= rom_req.req;
    rom_rsp.rdata  <= rom_req.addr ^ 32'hB007_C0DE;
  end

  always @(posedge clk) begin
    if (evt_done) n_jobs++;
    for (int p = 0; p < 4; p++)
      if (dut.i_xne.mem_req[p].req && !dut.i_xne.mem_rsp[p].gnt) n_xne_stall++;
    if (dut.priv_req[0].req && !dut.priv_rsp[0].gnt) n_priv_conflict++;
  end

  initial begin
    #400000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- bus helpers
  task automatic bus_write(ref mem_req_t rq, ref mem_rsp_t rs, input logic [31:0] a, input logic [31:0] d);
    @(negedge clk);
    rq = '0; rq.req = 1; rq.we = 1; rq.be = 4'hF; rq.addr = a; rq.wdata = d;
    #1;
    while (!rs.gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    rq = '0;
  endtask

  task automatic bus_read(ref mem_req_t rq, ref mem_rsp_t rs, input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    rq = '0; rq.req = 1; rq.we = 0; rq.be = 4'hF; rq.addr = a;
    #1;
    while (!rs.gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    rq = '0;
    d = rs.rdata;
  endtask

  function automatic logic [31:0] lfsr32(input logic [31:0] s);
    // Galois LFSR, polynomial x^32 + x^22 + x^2 + x + 1
    return (s >> 1) ^ (s[0] ? 32'h8020_0003 : 32'h0);
  endfunction

  // pipelined stream over nwords consecutive words of the debug port:
  // write the LFSR pattern or read it back and count differing bits
  task automatic lfsr_pass(input logic [31:0] base, input int nwords, input logic [31:0] seed,
                           input bit wr, output int errs);
    logic [31:0] s_iss, s_chk;
    int n_iss, n_chk;
    bit pend;
    errs = 0; s_iss = seed; s_chk = seed; n_iss = 0; n_chk = 0; pend = 0;
    @(negedge clk);
    while (n_chk < nwords) begin
      dbg_req = '0;
      if (n_iss < nwords) begin
        dbg_req.req = 1; dbg_req.we = wr; dbg_req.be = 4'hF;
        dbg_req.addr = base + 32'(4 * n_iss); dbg_req.wdata = s_iss;
      end
      #1;
      pend = dbg_req.req && dbg_rsp.gnt;
      @(posedge clk);
      #1;
      if (dbg_rsp.rvalid) begin
        if (!wr) errs += $countones(dbg_rsp.rdata ^ s_chk);
        s_chk = lfsr32(s_chk); n_chk++;
      end
      if (pend) begin s_iss = lfsr32(s_iss); n_iss++; end
      @(negedge clk);
    end
    dbg_req = '0;
  endtask

  task automatic apb_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); psel = 1; pwrite = 1; paddr = 12'(a); pwdata = d; penable = 0;
    @(negedge clk); penable = 1;
    @(negedge clk); psel = 0; penable = 0; pwrite = 0;
  endtask

  // ---------------------------------------------------------------- background traffic
  // core data port and uDMA port: reads/writes in a scratch area of the
  // interleaved SRAM (words 0x60000.. of the region); instruction port: fetches from private SCM
  // and from the 24 KB private SRAM cut while the data port writes that cut
  // acceptance of each background request, sampled at the clock edge
  logic acc_d = 0, acc_i = 0, acc_u = 0;
  always @(posedge clk) begin
    acc_d <= fc_data_req.req && fc_data_rsp.gnt;
    acc_i <= fc_instr_req.req && fc_instr_rsp.gnt;
    acc_u <= udma_req[0].req && udma_rsp[0].gnt;
  end

  initial begin
    fc_data_req = '0; fc_instr_req = '0; udma_req = '0;
    forever begin
      @(negedge clk);
      if (traffic_on) begin
        if (!fc_data_req.req || acc_d) begin
          fc_data_req = '0;
          if ($urandom % 2) begin
            fc_data_req.req = 1; fc_data_req.be = 4'hF; fc_data_req.we = $urandom % 2;
            fc_data_req.wdata = $urandom;
            fc_data_req.addr = ($urandom % 4 == 0) ? L2_PRIV_BASE + 32'h2000 + 32'(4 * ($urandom % 64))
                                                   : L2_IL_BASE + 32'h6_0000 + 32'(4 * ($urandom % 1024));
          end
        end
        if (!udma_req[0].req || acc_u) begin
          udma_req[0] = '0;
          if ($urandom % 2) begin
            udma_req[0].req = 1; udma_req[0].be = 4'hF; udma_req[0].we = 1; udma_req[0].wdata = $urandom;
            udma_req[0].addr = L2_IL_BASE + 32'h6_8000 + 32'(4 * ($urandom % 1024));
          end
        end
        if (!fc_instr_req.req || acc_i) begin
          fc_instr_req = '0;
          fc_instr_req.req = 1; fc_instr_req.be = 4'hF;
          fc_instr_req.addr = ($urandom % 2) ? L2_PRIV_BASE + 32'(4 * ($urandom % 256))
                                             : L2_PRIV_BASE + 32'h2000 + 32'(4 * ($urandom % 64));
        end
      end else begin
        if (!fc_data_req.req || acc_d) fc_data_req = '0;
        if (!udma_req[0].req || acc_u) udma_req[0] = '0;
        if (!fc_instr_req.req || acc_i) fc_instr_req = '0;
      end
    end
  end

  // ---------------------------------------------------------------- BNN data
  localparam logic [31:0] THR0 = L2_IL_BASE;             // interleaved SCM (first 8 KB)
  localparam logic [31:0] THR1 = L2_IL_BASE + 32'h80;
  localparam logic [31:0] X0   = L2_IL_BASE + 32'h2000;  // SRAM from here on
  localparam logic [31:0] W0   = L2_IL_BASE + 32'h4000;
  localparam logic [31:0] Y0   = L2_IL_BASE + 32'h1_8000;
  localparam logic [31:0] W1   = L2_IL_BASE + 32'h2_0000;
  localparam logic [31:0] Y1   = L2_IL_BASE + 32'h3_0000;
  localparam int OH = 4, OW = 4, IH = 6, IW = 6;

  logic [127:0] x0 [IH*IW];
  logic [127:0] w0 [9*128];
  logic [7:0]   t0 [128];
  logic [127:0] y0 [OH*OW];
  logic [127:0] w1 [16*128];
  logic [7:0]   t1 [128];
  logic [127:0] y1;

  task automatic write128(input logic [31:0] a, input logic [127:0] d);
    for (int k = 0; k < 4; k++) bus_write(dbg_req, dbg_rsp, a + 32'(4 * k), d[32*k +: 32]);
  endtask
  task automatic read128(input logic [31:0] a, output logic [127:0] d);
    for (int k = 0; k < 4; k++) begin
      logic [31:0] q;
      bus_read(dbg_req, dbg_rsp, a + 32'(4 * k), q);
      d[32*k +: 32] = q;
    end
  endtask

  function automatic int popc(input logic [127:0] v);
    return $countones(v);
  endfunction

  task automatic make_reference();
    // layer 0: conv 3x3, 128 -> 128, shift 3
    for (int i = 0; i < OH; i++)
      for (int j = 0; j < OW; j++) begin
        y0[i*OW+j] = '0;
        for (int ko = 0; ko < 128; ko++) begin
          int acc = 0;
          for (int ui = 0; ui < 3; ui++)
            for (int uj = 0; uj < 3; uj++)
              acc += popc(~(x0[(i+ui)*IW + (j+uj)] ^ w0[(ui*3+uj)*128 + ko]));
          y0[i*OW+j][ko] = !(acc < (int'(t0[ko]) << 3));
        end
      end
    // layer 1: fully connected 2048 -> 10, shift 3
    y1 = '0;
    for (int ko = 0; ko < 10; ko++) begin
      int acc = 0;
      for (int kim = 0; kim < 16; kim++) acc += popc(~(y0[kim] ^ w1[kim*128 + ko]));
      y1[ko] = !(acc < (int'(t1[ko]) << 3));
    end
  endtask

  task automatic load_network();
    for (int k = 0; k < IH*IW; k++) write128(X0 + 32'(16*k), x0[k]);
    for (int k = 0; k < 9*128; k++) write128(W0 + 32'(16*k), w0[k]);
    for (int k = 0; k < 16*128; k++) write128(W1 + 32'(16*k), w1[k]);
    for (int k = 0; k < 32; k++) begin
      bus_write(dbg_req, dbg_rsp, THR0 + 32'(4*k), {t0[4*k+3], t0[4*k+2], t0[4*k+1], t0[4*k]});
      bus_write(dbg_req, dbg_rsp, THR1 + 32'(4*k), {t1[4*k+3], t1[4*k+2], t1[4*k+1], t1[4*k]});
    end
  endtask

  task automatic run_job(input logic [31:0] xb, input logic [31:0] wb, input logic [31:0] yb, input logic [31:0] tb,
                         input int oh, input int ow, input int f, input int nki, input int nko);
    int jobs0, cyc0;
    jobs0 = n_jobs;
    apb_write(REG_X_BASE, xb);
    apb_write(REG_W_BASE, wb);
    apb_write(REG_Y_BASE, yb);
    apb_write(REG_THR_BASE, tb);
    apb_write(REG_OUT_HW, {16'(oh), 16'(ow)});
    apb_write(REG_FILTER, {24'd0, 4'(f), 4'(f)});
    apb_write(REG_CHANNELS, {16'(nko), 16'(nki)});
    apb_write(REG_SHIFT, 32'd3);
    cyc0 = $time / 10;
    apb_write(REG_TRIGGER, 0);
    while (n_jobs == jobs0 && ($time / 10 - cyc0) < 200000) @(posedge clk);
    if (nko % 128 != 0) n_partial_ko++;
    if (nki > 128) n_multi_ki++;
    last_cycles = $time / 10 - cyc0;
    $display("job %0dx%0d f%0d %0d->%0d done after %0d cycles", oh, ow, f, nki, nko, $time / 10 - cyc0);
  endtask

  task automatic run_network(output int bit_diff);
    logic [127:0] q;
    bit_diff = 0;
    traffic_on = 1;
    run_job(X0, W0, Y0, THR0, OH, OW, 3, 128, 128);
    run_job(Y0, W1, Y1, THR1, 1, 1, 1, 2048, 10);
    traffic_on = 0;
    repeat (4) @(posedge clk);
    for (int k = 0; k < OH*OW; k++) begin
      read128(Y0 + 32'(16*k), q);
      bit_diff += popc(q ^ y0[k]);
    end
    read128(Y1, q);
    bit_diff += popc(q ^ y1);
  endtask

  // ---------------------------------------------------------------- main
  initial begin
    int e, diff;
    logic [31:0] q;
    dbg_req = '0; udma_req[1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. SRAM self-test over the whole 448 KB of interleaved SRAM
    sram_ber = 0;
    lfsr_pass(L2_IL_BASE + 32'h2000, 448 * 256, 32'hACE1_0001, 1, e);
    lfsr_pass(L2_IL_BASE + 32'h2000, 448 * 256, 32'hACE1_0001, 0, e);
    checks++;
    $display("self-test, ideal SRAM: %0d bit errors in %0d bits", e, 448 * 256 * 32);
    if (e != 0) failures++;
    lfsr_pass(L2_IL_BASE + 32'h2000, 448 * 256, 32'h1234_0002, 1, e);
    sram_ber = 32'd4294967;   // 1e-3
    lfsr_pass(L2_IL_BASE + 32'h2000, 448 * 256, 32'h1234_0002, 0, e);
    n_bit_err += e;
    $display("self-test, BER 1e-3: %0d bit errors in %0d bits (rate %0.6f)", e, 448 * 256 * 32, real'(e) / (448.0 * 256 * 32));
    checks++;
    if (e < 448 * 256 * 32 / 2000 || e > 448 * 256 * 32 * 3 / 2000) failures++;
    // SCM regions stay exact at 1e-2
    sram_ber = 32'd42949673;
    lfsr_pass(L2_IL_BASE, 2048, 32'h0F0F_0003, 1, e);
    lfsr_pass(L2_IL_BASE, 2048, 32'h0F0F_0003, 0, e);
    checks++;
    $display("interleaved SCM at BER 1e-2: %0d bit errors", e);
    if (e != 0) failures++;
    lfsr_pass(L2_PRIV_BASE, 2048, 32'h0F0F_0004, 1, e);
    lfsr_pass(L2_PRIV_BASE, 2048, 32'h0F0F_0004, 0, e);
    checks++;
    $display("private SCM at BER 1e-2: %0d bit errors", e);
    if (e != 0) failures++;
    sram_ber = 0;

    // ROM and unmapped reads
    bus_read(dbg_req, dbg_rsp, ROM_BASE + 32'h40, q);
    n_rom++;
    checks++;
    if (q !== (32'h10 ^ 32'hB007_C0DE)) begin failures++; $display("FAIL ROM read %h", q); end
    bus_read(dbg_req, dbg_rsp, 32'h4000_0000, q);
    n_unmapped++;
    checks++;
    if (q !== 0) begin failures++; $display("FAIL unmapped read %h", q); end

    // 2. two-layer BNN
    for (int k = 0; k < IH*IW; k++) x0[k] = {$urandom, $urandom, $urandom, $urandom};
    for (int k = 0; k < 9*128; k++) w0[k] = {$urandom, $urandom, $urandom, $urandom};
    for (int k = 0; k < 16*128; k++) w1[k] = {$urandom, $urandom, $urandom, $urandom};
    for (int k = 0; k < 128; k++) begin
      t0[k] = 8'((9 * 128 / 2 >> 3) + int'($urandom % 5) - 2);
      t1[k] = 8'((2048 / 2 >> 3) + int'($urandom % 5) - 2);
    end
    make_reference();
    load_network();
    run_network(diff);
    checks++;
    $display("network, ideal SRAM: %0d output bits differ from the reference", diff);
    if (diff != 0) failures++;
    // layer 0 alone on a quiet bus: one 128-bit weight word per cycle, so
    // 16 pixels x 9 taps x (128 weight + 1 input words) = 18576 beats plus
    // the per-output threshold load and store (bound: +8 %)
    run_job(X0, W0, Y0, THR0, OH, OW, 3, 128, 128);
    checks++;
    if (last_cycles > 18576 * 108 / 100) begin failures++; $display("FAIL layer 0 took %0d cycles", last_cycles); end
    // same network with noisy SRAM (weights, inputs, activations; thresholds in SCM)
    sram_ber = 32'd42949673;   // 1e-2
    run_network(diff);
    sram_ber = 0;
    $display("network, BER 1e-2: %0d of %0d output bits differ from the reference", diff, OH*OW*128 + 128);
    checks++;
    if (diff == 0) begin failures++; $display("FAIL no output affected by SRAM errors"); end
    n_bit_err += diff;

    // mechanisms
    $display("mechanisms: jobs=%0d xne_stalls=%0d priv_conflicts=%0d sram_bit_errors=%0d rom=%0d unmapped=%0d partial_ko=%0d multi_ki=%0d",
             n_jobs, n_xne_stall, n_priv_conflict, n_bit_err, n_rom, n_unmapped, n_partial_ko, n_multi_ki);
    checks++; if (n_jobs != 5) failures++;
    checks++; if (n_xne_stall == 0) failures++;
    checks++; if (n_priv_conflict == 0) failures++;
    checks++; if (n_bit_err == 0) failures++;
    checks++; if (n_rom == 0 || n_unmapped == 0) failures++;
    checks++; if (n_partial_ko == 0 || n_multi_ki == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

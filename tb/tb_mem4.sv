// Testbench memory model with NP ports speaking the request/grant protocol
// of quentin_pkg: WORDS 32-bit words starting at byte address BASE, each
// port granted with probability (100 - STALL_PCT)%, data / write ack one
// cycle after the grant. Counts stalled request cycles.
module tb_mem4
  import quentin_pkg::*;
#(
  parameter int unsigned NP        = 4,
  parameter int unsigned WORDS     = 16384,
  parameter logic [31:0] BASE      = 32'h1C01_0000,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic               clk_i,
  input  mem_req_t [NP-1:0]  req,
  output mem_rsp_t [NP-1:0]  rsp,
  input  logic               stall_en
);
  logic [31:0] mem [WORDS];
  logic [NP-1:0] g;
  int stalls = 0;

  always_comb
    for (int p = 0; p < NP; p++) rsp[p].gnt = req[p].req && g[p];

  always @(negedge clk_i)
    for (int p = 0; p < NP; p++) g[p] = !stall_en || (($urandom % 100) >= STALL_PCT);

  always_ff @(posedge clk_i) begin
    for (int p = 0; p < NP; p++) begin
      rsp[p].rvalid <= req[p].req && g[p];
      if (req[p].req && !g[p]) stalls++;
      if (req[p].req && g[p]) begin
        int unsigned wi;
        wi = (req[p].addr - BASE) >> 2;
        if (req[p].we) begin
          for (int b = 0; b < 4; b++) if (req[p].be[b]) mem[wi][8*b +: 8] <= req[p].wdata[8*b +: 8];
        end else begin
          rsp[p].rdata <= mem[wi];
        end
      end
    end
  end
endmodule

// Testbench target model for the interconnect: a word-addressed memory of
// WORDS words (the request address is already the local word index) that
// grants with probability (100 - STALL_PCT)% and answers one cycle after
// the grant.
module tb_target
  import quentin_pkg::*;
#(
  parameter int unsigned WORDS     = 32768,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic     clk_i,
  input  mem_req_t req,
  output mem_rsp_t rsp
);
  logic [31:0] mem [WORDS];
  logic g = 1'b1;
  int served = 0;

  assign rsp.gnt = req.req && g;

  always @(negedge clk_i) g = (($urandom % 100) >= STALL_PCT);

  always_ff @(posedge clk_i) begin
    rsp.rvalid <= req.req && g;
    if (req.req && g) begin
      served <= served + 1;
      if (req.we) mem[req.addr % WORDS] <= req.wdata;
      else        rsp.rdata <= mem[req.addr % WORDS];
    end
  end
endmodule

// Activation store unit of the XNE streamer.
//
// Writes one 128-bit output word (the binarized activations of 128 output
// channels) to byte address addr over NPORTS (4) 32-bit ports, port k
// writing bytes 4k..4k+3. Each port requests until granted; done pulses in
// the cycle after the last port's write response (rvalid) has arrived, so the
// data is in memory when the controller moves on.
//
// The unit only writes full words, so we and be of its requests are constant.
// Timing: start (unit idle) latches addr and data; without contention done
// follows two cycles later.
module xne_store_unit
  import quentin_pkg::*;
#(
  parameter int unsigned NPORTS = 4
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   start,
  input  logic [31:0]            addr,
  input  logic [32*NPORTS-1:0]   data,
  output logic                   busy,
  output logic                   done,
  output mem_req_t [NPORTS-1:0]  req,
  input  mem_rsp_t [NPORTS-1:0]  rsp
);

  logic [31:0]             addr_q;
  logic [32*NPORTS-1:0]    data_q;
  logic                    active_q;
  logic [NPORTS-1:0]       g_q, r_q, r_now;

  always_comb begin
    for (int k = 0; k < NPORTS; k++) begin
      req[k].req   = active_q && !g_q[k];
      req[k].we    = 1'b1;
      req[k].be    = 4'hF;
      req[k].addr  = addr_q + 32'(4 * k);
      req[k].wdata = data_q[32*k +: 32];
      r_now[k]     = r_q[k] | rsp[k].rvalid;
    end
  end

  assign busy = active_q;
  assign done = active_q && (&r_now);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q <= 1'b0;
      addr_q   <= '0;
      data_q   <= '0;
      g_q      <= '0;
      r_q      <= '0;
    end else if (start && (!active_q || done)) begin
      active_q <= 1'b1;
      addr_q   <= addr;
      data_q   <= data;
      g_q      <= '0;
      r_q      <= '0;
    end else if (active_q) begin
      for (int k = 0; k < NPORTS; k++)
        if (req[k].req && rsp[k].gnt) g_q[k] <= 1'b1;
      r_q <= r_now;
      if (done) active_q <= 1'b0;
    end
  end

endmodule

// Load unit of the XNE streamer (used as input load unit and as weight load
// unit).
//
// Reads a burst of len 128-bit words starting at byte address base, with a
// 16-byte stride, over NPORTS (4) 32-bit memory ports: port k fetches bytes
// 4k..4k+3 of every word. The ports move in lockstep per word: each port
// requests until it is granted, and the next word is issued once every port
// has been granted the current one, so a stalled port never falls more than
// one word behind. One holding register per port keeps a response that
// arrives before its neighbours'; a word is delivered (out_valid, out_data,
// out_idx = its position in the burst) in the cycle its last part arrives.
// Without contention the unit issues and delivers one word per cycle, the
// 128 bits per cycle the datapath needs. The consumer must accept every word.
//
// The unit only reads: we, be and wdata of its requests are constants
// (0, 4'hF, 0) kept so that it drives the full bus structure.
// Timing: start (one cycle, unit idle or in the cycle of its last word) latches base/len; the first word
// arrives two cycles later at the earliest; done pulses with the last word.
module xne_load_unit
  import quentin_pkg::*;
#(
  parameter int unsigned NPORTS = 4
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       start,
  input  logic [31:0]                base,
  input  logic [7:0]                 len,
  output logic                       busy,
  output logic                       done,
  output logic                       out_valid,
  output logic [32*NPORTS-1:0]       out_data,
  output logic [7:0]                 out_idx,
  output mem_req_t [NPORTS-1:0]      req,
  input  mem_rsp_t [NPORTS-1:0]      rsp
);

  logic [31:0]        addr_q;
  logic [7:0]         len_q, iss_q, rcv_q;
  logic               active_q;
  logic [NPORTS-1:0]  g_q, g_now, hv_q, have;
  logic [NPORTS-1:0][31:0] hd_q;
  logic               issuing, word_issued;

  assign issuing = active_q && (iss_q < len_q);

  always_comb begin
    for (int k = 0; k < NPORTS; k++) begin
      req[k].req   = issuing && !g_q[k];
      req[k].we    = 1'b0;
      req[k].be    = 4'hF;
      req[k].addr  = addr_q + 32'(4 * k);
      req[k].wdata = '0;
      g_now[k]     = g_q[k] | (req[k].req & rsp[k].gnt);
      have[k]      = hv_q[k] | rsp[k].rvalid;
      out_data[32*k +: 32] = hv_q[k] ? hd_q[k] : rsp[k].rdata;
    end
  end

  assign word_issued = issuing && (&g_now);
  assign out_valid   = active_q && (&have);
  assign out_idx     = rcv_q;
  assign busy        = active_q;
  assign done        = out_valid && (rcv_q == len_q - 8'd1);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q <= 1'b0;
      addr_q   <= '0;
      len_q    <= '0;
      iss_q    <= '0;
      rcv_q    <= '0;
      g_q      <= '0;
      hv_q     <= '0;
      hd_q     <= '0;
    end else begin
      if (start && (!active_q || done)) begin
        active_q <= (len != 8'd0);
        addr_q   <= base;
        len_q    <= len;
        iss_q    <= '0;
        rcv_q    <= '0;
        g_q      <= '0;
        hv_q     <= '0;
      end else if (active_q) begin
        if (word_issued) begin
          g_q    <= '0;
          iss_q  <= iss_q + 8'd1;
          addr_q <= addr_q + 32'd16;
        end else begin
          g_q <= g_now;
        end
        if (out_valid) begin
          hv_q  <= '0;
          rcv_q <= rcv_q + 8'd1;
          if (done) active_q <= 1'b0;
        end else begin
          for (int k = 0; k < NPORTS; k++)
            if (rsp[k].rvalid && !hv_q[k]) begin
              hv_q[k] <= 1'b1;
              hd_q[k] <= rsp[k].rdata;
            end
        end
      end
    end
  end

  // a port must never return a second word while it still holds one
  for (genvar k = 0; k < NPORTS; k++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     !(hv_q[k] && rsp[k].rvalid && !out_valid))
      else $error("load unit: response overrun on port %0d", k);
  end

endmodule

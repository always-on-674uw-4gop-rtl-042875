// Round-robin arbiter (helper of the interconnect).
//
// Grants one of N requesters, starting the search one past the requester
// that was last granted, so every requester is served within N grants.
// gnt is one-hot (or zero when nothing requests) and combinational; the
// priority pointer moves only when advance is high in a cycle with a grant
// (the interconnect advances it only when the target accepted).
module rr_arbiter #(
  parameter int unsigned N  = 9,
  parameter int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [N-1:0]  req,
  input  logic          advance,
  output logic [N-1:0]  gnt,
  output logic [IW-1:0] idx
);

  logic [IW-1:0] last_q;

  always_comb begin
    gnt = '0;
    idx = '0;
    for (int o = N; o >= 1; o--) begin
      int unsigned c;
      c = (int'(last_q) + o) % N;
      if (req[c]) begin
        gnt = '0;
        gnt[c] = 1'b1;
        idx = IW'(c);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                  last_q <= IW'(N - 1);
    else if (advance && |req)     last_q <= idx;
  end

endmodule

// Streamer of the XNE: input load unit, weight load unit, activation store
// unit and the static multiplexer that connects one of them to the four
// 32-bit memory ports (4 x 32 = 128 bits per cycle).
//
// The controller selects the owner of the ports with sel for a whole phase
// (SEL_X: input load, SEL_W: weight/threshold load, SEL_ST: store) and only
// starts the selected unit; sel must stay put until that unit is done, since
// responses come back one cycle after each grant and follow sel. The unit
// structure follows the paper's block diagram; the lockstep 4-port protocol
// and the phase-wise muxing are this design's choice.
module xne_streamer
  import quentin_pkg::*;
#(
  parameter int unsigned NPORTS = 4
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic [1:0]             sel,
  // input load unit
  input  logic                   x_start,
  input  logic [31:0]            x_base,
  output logic                   x_done,
  output logic                   x_valid,
  output logic [32*NPORTS-1:0]   x_data,
  // weight load unit
  input  logic                   w_start,
  input  logic [31:0]            w_base,
  input  logic [7:0]             w_len,
  output logic                   w_done,
  output logic                   w_valid,
  output logic [32*NPORTS-1:0]   w_data,
  output logic [7:0]             w_idx,
  // activation store unit
  input  logic                   st_start,
  input  logic [31:0]            st_addr,
  input  logic [32*NPORTS-1:0]   st_data,
  output logic                   st_done,
  // memory ports
  output mem_req_t [NPORTS-1:0]  mem_req,
  input  mem_rsp_t [NPORTS-1:0]  mem_rsp
);

  localparam logic [1:0] SEL_X = 2'd0, SEL_W = 2'd1, SEL_ST = 2'd2;

  mem_req_t [NPORTS-1:0] x_req, w_req, s_req;
  mem_rsp_t [NPORTS-1:0] x_rsp, w_rsp, s_rsp;
  logic [7:0]            x_idx_unused;
  logic                  x_busy, w_busy, s_busy;

  always_comb begin
    for (int k = 0; k < NPORTS; k++) begin
      x_rsp[k] = '0;
      w_rsp[k] = '0;
      s_rsp[k] = '0;
      unique case (sel)
        SEL_X:   begin mem_req[k] = x_req[k]; x_rsp[k] = mem_rsp[k]; end
        SEL_W:   begin mem_req[k] = w_req[k]; w_rsp[k] = mem_rsp[k]; end
        SEL_ST:  begin mem_req[k] = s_req[k]; s_rsp[k] = mem_rsp[k]; end
        default: mem_req[k] = '0;
      endcase
    end
  end

  xne_load_unit #(.NPORTS(NPORTS)) i_input_load (
    .clk_i, .rst_ni,
    .start (x_start), .base (x_base), .len (8'd1),
    .busy (x_busy), .done (x_done),
    .out_valid (x_valid), .out_data (x_data), .out_idx (x_idx_unused),
    .req (x_req), .rsp (x_rsp)
  );

  xne_load_unit #(.NPORTS(NPORTS)) i_weight_load (
    .clk_i, .rst_ni,
    .start (w_start), .base (w_base), .len (w_len),
    .busy (w_busy), .done (w_done),
    .out_valid (w_valid), .out_data (w_data), .out_idx (w_idx),
    .req (w_req), .rsp (w_rsp)
  );

  xne_store_unit #(.NPORTS(NPORTS)) i_act_store (
    .clk_i, .rst_ni,
    .start (st_start), .addr (st_addr), .data (st_data),
    .busy (s_busy), .done (st_done),
    .req (s_req), .rsp (s_rsp)
  );

  // static muxing: only the selected unit may be active
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   !(x_busy && sel != SEL_X) && !(w_busy && sel != SEL_W) && !(s_busy && sel != SEL_ST))
    else $error("streamer: active unit not selected");

endmodule

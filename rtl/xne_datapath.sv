// Datapath of the XNE: input buffer, XNOR & popcount, accumulators,
// threshold buffer and threshold unit.
//
// The input buffer holds N (128) stationary input-channel bits of one input
// pixel. Each weight beat brings the N weight bits of one output channel
// (ko_idx); the XNOR/popcount unit multiplies them with the input buffer and
// the result is added to accumulator ko_idx. Streaming N weight beats, one
// per cycle, therefore computes an N x N binary matrix-vector product in N
// cycles, as the paper describes. The threshold buffer receives the 8-bit
// thresholds 16 per 128-bit beat (thr_idx selects which 16), and y gives the
// binarized outputs of all N accumulators at once; output channels beyond
// the layer's width (ko_mask = 0) read 0.
//
// Interface: x_valid/x_data load the input buffer, w_valid/w_data/ko_idx
// accumulate, acc_clr clears the accumulators, thr_valid/thr_idx/thr_data
// fill the threshold buffer. ki_mask marks the active input channels of the
// current pass. All loads take effect at the clock edge; y is combinational
// from the registers.
module xne_datapath
  import xne_pkg::*;
#(
  parameter int unsigned N = XNE_N
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  x_valid,
  input  logic [N-1:0]          x_data,
  input  logic [N-1:0]          ki_mask,
  input  logic                  acc_clr,
  input  logic                  w_valid,
  input  logic [N-1:0]          w_data,
  input  logic [$clog2(N)-1:0]  ko_idx,
  input  logic                  thr_valid,
  input  logic [$clog2(N/16)-1:0] thr_idx,
  input  logic [N-1:0]          thr_data,
  input  logic [3:0]            thr_shift,
  input  logic [N-1:0]          ko_mask,
  output logic [N-1:0]          y
);

  localparam int unsigned CW = $clog2(N + 1);

  logic [N-1:0]                    xbuf;
  logic [N-1:0][XNE_THR_W-1:0]     thr_buf;
  logic [CW-1:0]                   popcnt;
  logic [N-1:0][XNE_ACC_W-1:0]     acc;
  logic [N-1:0]                    y_raw;

  // input buffer: stationary input-channel bits
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      xbuf <= '0;
    else if (x_valid) xbuf <= x_data;
  end

  // threshold buffer: 16 thresholds per beat
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      thr_buf <= '0;
    end else if (thr_valid) begin
      for (int b = 0; b < 16; b++)
        thr_buf[16*thr_idx + b] <= thr_data[8*b +: 8];
    end
  end

  xne_xnor_popcount #(.N(N)) i_popcount (
    .x      (xbuf),
    .w      (w_data),
    .mask   (ki_mask),
    .popcnt (popcnt)
  );

  xne_accumulators #(.N(N), .ACC_W(XNE_ACC_W)) i_acc (
    .clk_i  (clk_i),
    .rst_ni (rst_ni),
    .clr    (acc_clr),
    .en     (w_valid),
    .idx    (ko_idx),
    .popcnt (popcnt),
    .acc    (acc)
  );

  xne_threshold #(.N(N), .ACC_W(XNE_ACC_W), .THR_W(XNE_THR_W)) i_thr (
    .acc   (acc),
    .thr   (thr_buf),
    .shift (thr_shift),
    .y     (y_raw)
  );

  assign y = y_raw & ko_mask;

endmodule

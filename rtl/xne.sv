// XNOR Neural Engine (XNE): binary neural network layer accelerator.
//
// The core writes a layer description into the configuration registers
// (32-bit APB slave, map in xne_pkg) and triggers a job; the engine then
// runs the whole convolutional or fully connected layer from L2 on its own
// and pulses evt_done, on which the sleeping core wakes up. Inside, as in the
// paper: a controller (register file, FSM, loop sequencer), a streamer (input
// load, weight load and activation store units statically multiplexed on
// four 32-bit memory ports, 128 bits per cycle) and a datapath (128-bit input
// buffer, 128 XNORs + popcount, 128 x 16-bit accumulators, 8-bit shifted
// thresholds). Partial sums never leave the accelerator: only binarized
// output words are written back.
//
// Throughput: one 128 x 128 binary matrix-vector product per 128 cycles of
// weight streaming, plus a few cycles per input word and per output word.
module xne
  import quentin_pkg::*;
  import xne_pkg::*;
(
  input  logic                      clk_i,
  input  logic                      rst_ni,
  // configuration slave
  input  logic                      psel,
  input  logic                      penable,
  input  logic                      pwrite,
  input  logic [11:0]               paddr,
  input  logic [31:0]               pwdata,
  output logic [31:0]               prdata,
  output logic                      pready,
  // master ports to the interleaved L2
  output mem_req_t [XNE_PORTS-1:0]  mem_req,
  input  mem_rsp_t [XNE_PORTS-1:0]  mem_rsp,
  // end-of-job event
  output logic                      evt_done
);

  xne_cfg_t             cfg;
  logic                 start, busy, done;
  logic [1:0]           sel;
  logic                 x_start, x_done, x_valid;
  logic                 w_start, w_done, w_valid;
  logic                 st_start, st_done;
  logic [31:0]          x_base, w_base, st_addr;
  logic [7:0]           w_len, w_idx;
  logic [XNE_N-1:0]     x_data, w_data, y;
  logic                 acc_clr, thr_phase;
  logic [XNE_N-1:0]     ki_mask, ko_mask;

  xne_regfile i_regfile (
    .clk_i, .rst_ni,
    .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready,
    .cfg, .start, .busy, .done
  );

  xne_ctrl i_ctrl (
    .clk_i, .rst_ni, .cfg, .start, .busy, .done,
    .sel, .x_start, .x_base, .x_done,
    .w_start, .w_base, .w_len, .w_done,
    .st_start, .st_addr, .st_done,
    .acc_clr, .thr_phase, .ki_mask, .ko_mask
  );

  xne_streamer #(.NPORTS(XNE_PORTS)) i_streamer (
    .clk_i, .rst_ni, .sel,
    .x_start, .x_base, .x_done, .x_valid, .x_data,
    .w_start, .w_base, .w_len, .w_done, .w_valid, .w_data, .w_idx,
    .st_start, .st_addr, .st_data (y), .st_done,
    .mem_req, .mem_rsp
  );

  xne_datapath #(.N(XNE_N)) i_datapath (
    .clk_i, .rst_ni,
    .x_valid, .x_data, .ki_mask,
    .acc_clr,
    .w_valid  (w_valid && !thr_phase),
    .w_data,
    .ko_idx   (w_idx[6:0]),
    .thr_valid(w_valid && thr_phase),
    .thr_idx  (w_idx[2:0]),
    .thr_data (w_data),
    .thr_shift(cfg.thr_shift),
    .ko_mask,
    .y
  );

  assign evt_done = done;

endmodule

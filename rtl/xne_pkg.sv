// Constants, configuration record and register map of the XNOR Neural
// Engine (XNE).
//
// The datapath width (128 channels), the 16-bit accumulators and the 8-bit
// thresholds are the paper's numbers. The register map and the layout of
// the tensors in memory are this design's choice:
//   x  (input)  : word (h, w, ki_major) at X_BASE + ((h*in_w + w)*ki_maj + ki_major)*16
//   W  (weights): word (ko_major, ui, uj, ki_major, ko_minor) at
//                 W_BASE + ((((ko_major*fh + ui)*fw + uj)*ki_maj + ki_major)*128 + ko_minor)*16
//   thresholds  : byte ko at THR_BASE + ko (128 bytes per ko_major, 8 words)
//   y  (output) : word (i, j, ko_major) at Y_BASE + ((i*out_w + j)*ko_maj + ko_major)*16
// with in_w = out_w + fw - 1 (valid convolution), ki_maj = ceil(n_ki/128),
// ko_maj = ceil(n_ko/128). Bit c of a 128-bit word is channel 128*major + c.
package xne_pkg;

  localparam int unsigned XNE_N     = 128;  // channels per datapath pass
  localparam int unsigned XNE_ACC_W = 16;   // accumulator width
  localparam int unsigned XNE_THR_W = 8;    // threshold width
  localparam int unsigned XNE_PORTS = 4;    // 32-bit memory ports

  typedef struct packed {
    logic [31:0] x_base;
    logic [31:0] w_base;
    logic [31:0] y_base;
    logic [31:0] thr_base;
    logic [15:0] out_h;     // output height (>= 1)
    logic [15:0] out_w;     // output width  (>= 1)
    logic [3:0]  fh;        // filter height (>= 1)
    logic [3:0]  fw;        // filter width  (>= 1)
    logic [15:0] n_ki;      // input channels (>= 1)
    logic [15:0] n_ko;      // output channels (>= 1)
    logic [3:0]  thr_shift; // left shift applied to the 8-bit thresholds
  } xne_cfg_t;

  // register byte offsets on the 32-bit configuration slave
  localparam logic [7:0] REG_TRIGGER  = 8'h00; // write: start a job
  localparam logic [7:0] REG_STATUS   = 8'h04; // read: bit0 busy
  localparam logic [7:0] REG_JOB_ID   = 8'h08; // read: id of last started job
  localparam logic [7:0] REG_X_BASE   = 8'h0C;
  localparam logic [7:0] REG_W_BASE   = 8'h10;
  localparam logic [7:0] REG_Y_BASE   = 8'h14;
  localparam logic [7:0] REG_THR_BASE = 8'h18;
  localparam logic [7:0] REG_OUT_HW   = 8'h1C; // [31:16] out_h, [15:0] out_w
  localparam logic [7:0] REG_FILTER   = 8'h20; // [7:4] fh, [3:0] fw
  localparam logic [7:0] REG_CHANNELS = 8'h24; // [31:16] n_ko, [15:0] n_ki
  localparam logic [7:0] REG_SHIFT    = 8'h28; // [3:0] threshold shift

endpackage

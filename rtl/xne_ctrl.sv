// Controller FSM of the XNE.
//
// Runs one BNN layer (convolutional or fully connected) after start:
//   for every output word (i, j, ko_major):
//     clear the accumulators and load the 8 threshold words (128 x 8 bit)
//     for every (ui, uj, ki_major):
//       load one 128-bit input word into the input buffer,
//       stream n_ko_cur weight words, one per output channel, each one
//       accumulated into its channel's accumulator
//     binarize against the thresholds and store the 128-bit output word
// and pulses done at the end. The loop order is the paper's (Fig. 2b of the
// paper); the state sequence, the per-word threshold reload and the absence
// of overlap between phases are this design's choices, which cost a few
// cycles of overhead around each 128-cycle weight burst.
//
// The loop counters and addresses come from xne_loop_ctrl, instantiated here.
// ctrl drives the streamer (sel, start strobes) and the datapath strobes.
module xne_ctrl
  import xne_pkg::*;
(
  input  logic             clk_i,
  input  logic             rst_ni,
  input  xne_cfg_t         cfg,
  input  logic             start,
  output logic             busy,
  output logic             done,
  // streamer
  output logic [1:0]       sel,
  output logic             x_start,
  output logic [31:0]      x_base,
  input  logic             x_done,
  output logic             w_start,
  output logic [31:0]      w_base,
  output logic [7:0]       w_len,
  input  logic             w_done,
  output logic             st_start,
  output logic [31:0]      st_addr,
  input  logic             st_done,
  // datapath
  output logic             acc_clr,
  output logic             thr_phase,
  output logic [XNE_N-1:0] ki_mask,
  output logic [XNE_N-1:0] ko_mask
);

  typedef enum logic [2:0] {
    S_IDLE, S_PIX, S_THR, S_X, S_W, S_ST
  } state_e;

  state_e state_q, state_d;

  logic        loop_clr, loop_next;
  logic [31:0] x_addr, w_addr, thr_addr, y_addr;
  logic [7:0]  n_ko_cur;
  logic        first_inner, last_inner, last;
  logic        launched_q;  // start strobe of the current phase already given

  xne_loop_ctrl i_loop (
    .clk_i, .rst_ni, .cfg,
    .clr (loop_clr), .next (loop_next),
    .x_addr, .w_addr, .thr_addr, .y_addr,
    .ki_mask, .ko_mask, .n_ko_cur,
    .first_inner, .last_inner, .last
  );

  always_comb begin
    state_d   = state_q;
    loop_clr  = 1'b0;
    loop_next = 1'b0;
    acc_clr   = 1'b0;
    x_start   = 1'b0;
    w_start   = 1'b0;
    st_start  = 1'b0;
    done      = 1'b0;
    sel       = 2'd1;
    x_base    = x_addr;
    w_base    = (state_q == S_THR) ? thr_addr : w_addr;
    w_len     = (state_q == S_THR) ? 8'd8 : n_ko_cur;
    st_addr   = y_addr;
    unique case (state_q)
      S_IDLE: if (start) begin
        loop_clr = 1'b1;
        state_d  = S_PIX;
      end
      S_PIX: begin
        acc_clr = 1'b1;
        state_d = S_THR;
      end
      S_THR: begin
        sel     = 2'd1;
        w_start = !launched_q;
        if (w_done) state_d = S_X;
      end
      S_X: begin
        sel     = 2'd0;
        x_start = !launched_q;
        if (x_done) state_d = S_W;
      end
      S_W: begin
        sel     = 2'd1;
        w_start = !launched_q;
        if (w_done) begin
          if (last_inner) begin
            state_d = S_ST;
          end else begin
            loop_next = 1'b1;
            state_d   = S_X;
          end
        end
      end
      S_ST: begin
        sel      = 2'd2;
        st_start = !launched_q;
        if (st_done) begin
          if (last) begin
            done    = 1'b1;
            state_d = S_IDLE;
          end else begin
            loop_next = 1'b1;
            state_d   = S_PIX;
          end
        end
      end
      default: state_d = S_IDLE;
    endcase
  end

  assign busy      = (state_q != S_IDLE);
  assign thr_phase = (state_q == S_THR);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= S_IDLE;
      launched_q <= 1'b0;
    end else begin
      state_q    <= state_d;
      launched_q <= (state_d == state_q) && (state_q != S_IDLE) && (state_q != S_PIX);
    end
  end

endmodule

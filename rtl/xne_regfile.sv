// Configuration register file of the XNE (memory-mapped 32-bit slave).
//
// The core programs a layer by writing the registers listed in xne_pkg over
// an APB slave port (zero wait states), then writes REG_TRIGGER. The write
// raises start for one cycle, increments the job id and is ignored while a
// job is busy. STATUS bit 0 reads busy, bit 1 is a sticky done flag that is
// cleared by the next trigger. JOB_ID returns the id of the last started job,
// which the runtime can use the way xne_run()/xne_wait() use a job id.
// The register map, the APB protocol and the sticky flag are this design's
// choices; the paper states only that the registers are memory mapped and
// written by the core.
module xne_regfile
  import xne_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // APB slave
  input  logic        psel,
  input  logic        penable,
  input  logic        pwrite,
  input  logic [11:0] paddr,
  input  logic [31:0] pwdata,
  output logic [31:0] prdata,
  output logic        pready,
  // to/from controller
  output xne_cfg_t    cfg,
  output logic        start,
  input  logic        busy,
  input  logic        done
);

  logic [7:0]  job_id;
  logic        done_flag;
  logic        wr, rd;
  logic [7:0]  off;

  assign off    = paddr[7:0];
  assign wr     = psel & penable & pwrite;
  assign rd     = psel & ~pwrite;
  assign pready = 1'b1;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg       <= '0;
      start     <= 1'b0;
      job_id    <= '0;
      done_flag <= 1'b0;
    end else begin
      start <= 1'b0;
      if (done) done_flag <= 1'b1;
      if (wr) begin
        unique case (off)
          REG_TRIGGER: if (!busy && !start) begin
            start     <= 1'b1;
            job_id    <= job_id + 8'd1;
            done_flag <= 1'b0;
          end
          REG_X_BASE:   cfg.x_base   <= pwdata;
          REG_W_BASE:   cfg.w_base   <= pwdata;
          REG_Y_BASE:   cfg.y_base   <= pwdata;
          REG_THR_BASE: cfg.thr_base <= pwdata;
          REG_OUT_HW:   begin cfg.out_h <= pwdata[31:16]; cfg.out_w <= pwdata[15:0]; end
          REG_FILTER:   begin cfg.fh <= pwdata[7:4]; cfg.fw <= pwdata[3:0]; end
          REG_CHANNELS: begin cfg.n_ko <= pwdata[31:16]; cfg.n_ki <= pwdata[15:0]; end
          REG_SHIFT:    cfg.thr_shift <= pwdata[3:0];
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    prdata = '0;
    if (rd) begin
      unique case (off)
        REG_STATUS:   prdata = {30'd0, done_flag, busy | start};
        REG_JOB_ID:   prdata = {24'd0, job_id};
        REG_X_BASE:   prdata = cfg.x_base;
        REG_W_BASE:   prdata = cfg.w_base;
        REG_Y_BASE:   prdata = cfg.y_base;
        REG_THR_BASE: prdata = cfg.thr_base;
        REG_OUT_HW:   prdata = {cfg.out_h, cfg.out_w};
        REG_FILTER:   prdata = {24'd0, cfg.fh, cfg.fw};
        REG_CHANNELS: prdata = {cfg.n_ko, cfg.n_ki};
        REG_SHIFT:    prdata = {28'd0, cfg.thr_shift};
        default:      prdata = '0;
      endcase
    end
  end

endmodule

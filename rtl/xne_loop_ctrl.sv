// Loop sequencer of the XNE ("microcoded loop").
//
// Walks the outer loops of a binary convolution layer in the order
//   for i < out_h, j < out_w, ko_major < ko_maj, ui < fh, uj < fw, ki_major < ki_maj
// (innermost last) and gives, for the current iteration, the byte addresses
// of the input word, of the first weight word of the 128-weight burst, of the
// threshold block and of the output word, using the layouts in xne_pkg. The
// loop nest is the paper's; the paper implements it with a small microcode,
// while this design hard-wires the nest as counters with address arithmetic.
// It also gives the active-channel masks of the current ki_major/ko_major
// pass (layers whose channel count is not a multiple of 128) and the number
// of weight beats n_ko_cur of the current output pass.
//
// Interface: clr restarts at iteration 0, next advances the innermost loop
// with carry into the outer ones. first_inner / last_inner flag the first /
// last (ui, uj, ki_major) iteration of one output word, last the final
// iteration of the layer. Outputs are combinational from the counters.
module xne_loop_ctrl
  import xne_pkg::*;
(
  input  logic           clk_i,
  input  logic           rst_ni,
  input  xne_cfg_t       cfg,
  input  logic           clr,
  input  logic           next,
  output logic [31:0]    x_addr,
  output logic [31:0]    w_addr,
  output logic [31:0]    thr_addr,
  output logic [31:0]    y_addr,
  output logic [XNE_N-1:0] ki_mask,
  output logic [XNE_N-1:0] ko_mask,
  output logic [7:0]     n_ko_cur,
  output logic           first_inner,
  output logic           last_inner,
  output logic           last
);

  logic [15:0] i, j, kom, kim;
  logic [3:0]  ui, uj;
  logic [15:0] ki_maj, ko_maj, in_w;
  logic [15:0] ki_rem, ko_rem;
  logic        l_kim, l_uj, l_ui, l_kom, l_j, l_i;

  assign ki_maj = (cfg.n_ki + 16'd127) >> 7;
  assign ko_maj = (cfg.n_ko + 16'd127) >> 7;
  assign in_w   = cfg.out_w + 16'(cfg.fw) - 16'd1;

  assign l_kim = (kim == ki_maj - 16'd1);
  assign l_uj  = (uj  == cfg.fw - 4'd1);
  assign l_ui  = (ui  == cfg.fh - 4'd1);
  assign l_kom = (kom == ko_maj - 16'd1);
  assign l_j   = (j   == cfg.out_w - 16'd1);
  assign l_i   = (i   == cfg.out_h - 16'd1);

  assign first_inner = (kim == '0) && (uj == '0) && (ui == '0);
  assign last_inner  = l_kim && l_uj && l_ui;
  assign last        = last_inner && l_kom && l_j && l_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      {i, j, kom, kim} <= '0;
      {ui, uj}         <= '0;
    end else if (clr) begin
      {i, j, kom, kim} <= '0;
      {ui, uj}         <= '0;
    end else if (next) begin
      kim <= l_kim ? '0 : kim + 16'd1;
      if (l_kim) begin
        uj <= l_uj ? '0 : uj + 4'd1;
        if (l_uj) begin
          ui <= l_ui ? '0 : ui + 4'd1;
          if (l_ui) begin
            kom <= l_kom ? '0 : kom + 16'd1;
            if (l_kom) begin
              j <= l_j ? '0 : j + 16'd1;
              if (l_j) i <= l_i ? '0 : i + 16'd1;
            end
          end
        end
      end
    end
  end

  // address arithmetic (word index times 16 bytes)
  logic [31:0] x_word, w_word, y_word;
  assign x_word = ((32'(i) + 32'(ui)) * 32'(in_w) + 32'(j) + 32'(uj)) * 32'(ki_maj) + 32'(kim);
  assign w_word = ((((32'(kom) * 32'(cfg.fh) + 32'(ui)) * 32'(cfg.fw) + 32'(uj)) * 32'(ki_maj)
                   + 32'(kim)) << 7);
  assign y_word = (32'(i) * 32'(cfg.out_w) + 32'(j)) * 32'(ko_maj) + 32'(kom);

  assign x_addr   = cfg.x_base   + (x_word << 4);
  assign w_addr   = cfg.w_base   + (w_word << 4);
  assign y_addr   = cfg.y_base   + (y_word << 4);
  assign thr_addr = cfg.thr_base + (32'(kom) << 7);

  // channels active in the current pass
  assign ki_rem = l_kim ? (cfg.n_ki - (kim << 7)) : 16'd128;
  assign ko_rem = l_kom ? (cfg.n_ko - (kom << 7)) : 16'd128;
  assign n_ko_cur = ko_rem[7:0];

  always_comb begin
    for (int c = 0; c < XNE_N; c++) begin
      ki_mask[c] = (16'(c) < ki_rem);
      ko_mask[c] = (16'(c) < ko_rem);
    end
  end

endmodule

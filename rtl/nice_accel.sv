// nice_accel: integer-only inference engine for a quantized residual
// denoising / demosaicing network.
//
// The network is a chain of NU = 20 residual stages followed by an output
// convolution. Each stage applies two 3x3 convolutions to the same input: one
// with 61 clamped-ReLU outputs (8-bit codes), one with 3 outputs and no
// activation that is added to the 16-bit image carried along the skip path.
// The 61 + 3 = 64 channels form the next stage's input. The output
// convolution produces 3 channels that are added to the original input image.
// Weights are 4-bit, activations 8-bit, biases and the image 16-bit, and every
// rescaling uses scale factors of the form q * 2^p, so the whole computation
// needs only integer multipliers, adders and shifts.
//
// The engine computes one layer at a time (a stage is one layer of 64 output
// channels). layer_seq issues one 3x3-window step per cycle to conv_mac, which
// serves LANES output channels at once; finished sums go through
// requant_path (scale, bias, skip, clamp + ReLU, round) and are written to
// the other bank of fmap_buffer. Parameters and the layer configuration sit
// in param_mem, loaded by the host before start.
//
// Host interface (all synchronous to clk, one write per cycle):
//   ld_*    input image pixels (3 x 16 bit) at pixel index y * MAX_W + x
//   wt_*    weight words, bias_* biases, cfg_* layer records (see param_mem)
//   start   pulse to run all NL layers on the loaded image; busy while it
//           runs, done (level) when finished; cycles = run length
//   out_pix / out_img  the result image, readable after done
//   stat_*  event counters of the last run: results clamped at zero (ReLU),
//           at the top of the range, and image results with a skip added
//
// What follows the published design: the network shape, the bit widths, the
// datapath order of the residual block and the q * 2^p scale format. The
// memory organisation, the schedule, LANES, the frame size limit and the
// host ports are this design's own choices.
module nice_accel
  import nice_pkg::*;
#(
  parameter int unsigned LANES  = 16,
  parameter int unsigned MAX_H  = 132,
  parameter int unsigned MAX_W  = 220,
  parameter int unsigned NL     = NUM_LAYERS,
  parameter int unsigned WDEPTH = net_weight_words(LANES),
  localparam int unsigned PIX   = MAX_H * MAX_W,
  localparam int unsigned PW    = $clog2(PIX),
  localparam int unsigned HW    = $clog2(MAX_H + 1),
  localparam int unsigned WW    = $clog2(MAX_W + 1),
  localparam int unsigned WA    = $clog2(WDEPTH),
  localparam int unsigned BA    = $clog2(NL * C_ALL),
  localparam int unsigned LA    = $clog2(NL)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // run control
  input  logic                               start,
  input  logic [HW-1:0]                      img_h,
  input  logic [WW-1:0]                      img_w,
  output logic                               busy,
  output logic                               done,
  output logic [31:0]                        cycles,
  // image load
  input  logic                               ld_en,
  input  logic [PW-1:0]                      ld_pix,
  input  logic [C_IMG-1:0][B_IMG-1:0]        ld_img,
  // parameter load
  input  logic                               wt_we,
  input  logic [WA-1:0]                      wt_addr,
  input  logic [LANES-1:0][KK-1:0][B_W-1:0]  wt_data,
  input  logic                               bias_we,
  input  logic [BA-1:0]                      bias_addr,
  input  logic [B_B-1:0]                     bias_data,
  input  logic                               cfg_we,
  input  logic [LA-1:0]                      cfg_addr,
  input  layer_cfg_t                         cfg_data,
  // result read
  input  logic [PW-1:0]                      out_pix,
  output logic [C_IMG-1:0][B_IMG-1:0]        out_img,
  // event counters
  output logic [31:0]                        stat_clip_lo,
  output logic [31:0]                        stat_clip_hi,
  output logic [31:0]                        stat_skip
);

  localparam int unsigned YW    = $clog2(MAX_H);
  localparam int unsigned XW    = $clog2(MAX_W);
  localparam int unsigned TAG_W = PW + CH_W + LANES;

  // ---------------------------------------------------------------- sequencer
  layer_cfg_t      cfg;
  logic [LA-1:0]   layer;
  logic            step_valid, step_first, step_last, rd_bank;
  logic [CH_W-1:0] rd_ch, grp_base;
  logic [YW-1:0]   rd_y;
  logic [XW-1:0]   rd_x;
  logic [15:0]     w_addr;

  layer_seq #(.LANES(LANES), .MAX_H(MAX_H), .MAX_W(MAX_W), .NL(NL)) u_seq (
    .clk, .rst_n, .start, .img_h, .img_w, .cfg, .layer, .busy, .done, .cycles,
    .step_valid, .step_first, .step_last, .rd_ch, .rd_y, .rd_x, .grp_base,
    .w_addr, .rd_bank
  );

  // --------------------------------------------------------------- parameters
  logic [LANES-1:0][KK-1:0][B_W-1:0] wts;
  logic [LANES-1:0][B_B-1:0]         bias_rd;
  logic [BA-1:0]                     bias_raddr;

  assign bias_raddr = BA'(int'(layer) * int'(C_ALL) + int'(grp_base));

  param_mem #(.LANES(LANES), .WDEPTH(WDEPTH), .NL(NL)) u_par (
    .clk,
    .wt_we, .wt_addr, .wt_data,
    .bias_we, .bias_addr, .bias_data,
    .cfg_we, .cfg_addr, .cfg_data,
    .wt_raddr  (WA'(w_addr)),
    .wt_rdata  (wts),
    .bias_raddr,
    .bias_rdata(bias_rd),
    .cfg_raddr (layer),
    .cfg_rdata (cfg)
  );

  // ------------------------------------------------------------- feature maps
  logic [KK-1:0][B_A-1:0]        win;
  logic [C_IMG-1:0][B_IMG-1:0]   skip_img;
  logic                          rq_valid;
  logic [TAG_W-1:0]              rq_tag;
  logic [LANES-1:0][B_IMG-1:0]   rq_code;
  logic [LANES-1:0]              rq_lo, rq_hi;
  logic [PW-1:0]                 wr_pix;
  logic [CH_W-1:0]               wr_ch_base;
  logic [LANES-1:0]              wr_mask;

  assign {wr_pix, wr_ch_base, wr_mask} = rq_tag;

  fmap_buffer #(.MAX_H(MAX_H), .MAX_W(MAX_W), .LANES(LANES)) u_fmap (
    .clk, .img_h, .img_w,
    .rd_bank, .rd_ch, .rd_y, .rd_x,
    .skip_orig (cfg.skip_orig),
    .win, .skip_img,
    .wr_en      (rq_valid),
    .wr_bank    (~rd_bank),
    .wr_pix, .wr_ch_base,
    .wr_img_base(cfg.img_base),
    .wr_mask, .wr_code(rq_code),
    .ld_en, .ld_pix, .ld_img,
    .out_bank   (((NL - 1) % 2) == 0),
    .out_pix, .out_img
  );

  // ---------------------------------------------------------------- MAC array
  logic                         mac_valid;
  logic [LANES-1:0][ACC_W-1:0]  mac_acc;

  conv_mac #(.LANES(LANES)) u_mac (
    .clk, .rst_n,
    .in_valid (step_valid),
    .in_first (step_first),
    .in_last  (step_last),
    .win, .wts,
    .out_valid(mac_valid),
    .acc      (mac_acc)
  );

  // Side information captured with the last step of a group, so that it is
  // aligned with the sums leaving conv_mac.
  logic [TAG_W-1:0]              tag_q;
  logic [LANES-1:0][B_B-1:0]     bias_q;
  logic [LANES-1:0]              img_lane_q;
  logic [LANES-1:0][B_IMG-1:0]   skip_q;
  logic [LANES-1:0]              img_lane;
  logic [LANES-1:0]              lane_used;
  logic [LANES-1:0][B_IMG-1:0]   lane_skip;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      automatic int ch = int'(grp_base) + l;
      automatic int j  = ch - int'(cfg.img_base);
      lane_used[l] = ch < int'(cfg.cout_cnt);
      img_lane[l]  = lane_used[l] && j >= 0 && j < int'(C_IMG);
      lane_skip[l] = img_lane[l] ? skip_img[j[1:0]] : '0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tag_q      <= '0;
      bias_q     <= '0;
      img_lane_q <= '0;
      skip_q     <= '0;
    end else if (step_valid && step_last) begin
      tag_q      <= {PW'(int'(rd_y) * int'(MAX_W) + int'(rd_x)), grp_base, lane_used};
      bias_q     <= bias_rd;
      img_lane_q <= img_lane;
      skip_q     <= lane_skip;
    end
  end

  // ----------------------------------------------------------- requantization
  requant_path #(.LANES(LANES), .TAG_W(TAG_W)) u_rq (
    .clk, .rst_n,
    .in_valid (mac_valid),
    .in_tag   (tag_q),
    .acc      (mac_acc),
    .bias     (bias_q),
    .m_sel    (img_lane_q),
    .m_act    (cfg.m_act),
    .m_img    (cfg.m_img),
    .skip     (skip_q),
    .skip_en  (img_lane_q),
    .s_skip   (cfg.s_skip),
    .out_valid(rq_valid),
    .out_tag  (rq_tag),
    .code     (rq_code),
    .clip_lo  (rq_lo),
    .clip_hi  (rq_hi)
  );

  // ----------------------------------------------------------- event counters
  logic [LANES-1:0] img_lane_d1, img_lane_d2;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      stat_clip_lo <= '0;
      stat_clip_hi <= '0;
      stat_skip    <= '0;
      img_lane_d1  <= '0;
      img_lane_d2  <= '0;
    end else begin
      if (mac_valid) img_lane_d1 <= img_lane_q;
      img_lane_d2 <= img_lane_d1;
      if (start && !busy) begin
        stat_clip_lo <= '0;
        stat_clip_hi <= '0;
        stat_skip    <= '0;
      end else if (rq_valid) begin
        stat_clip_lo <= stat_clip_lo + 32'($countones(rq_lo & wr_mask));
        stat_clip_hi <= stat_clip_hi + 32'($countones(rq_hi & wr_mask));
        stat_skip    <= stat_skip + 32'($countones(img_lane_d2 & wr_mask));
      end
    end
  end

endmodule

// fmap_buffer: on-chip feature-map memory of the layer-by-layer engine.
//
// Two banks (ping-pong): a layer reads one bank and writes the other, and the
// banks swap at every layer. Each bank holds, per pixel of an up to
// MAX_H x MAX_W frame, C_ALL = 64 channels of 8-bit codes (61 ReLU channels
// and the 8-bit copies of the 3 image channels, which feed the next
// convolution) and the 3 image channels at full 16-bit precision (which feed
// the skip connections). A third store keeps the original 16-bit input image
// for the global skip around the whole network.
//
// Read side (combinational): the 3x3 window of channel rd_ch centred on
// (rd_y, rd_x), with zeros outside the img_h x img_w frame, and the three
// 16-bit image codes of pixel (rd_y, rd_x), from the read bank or, with
// skip_orig, from the original input.
// Write side (one clock): up to LANES consecutive channels of one pixel per
// cycle. A lane whose channel is an image channel (img_base .. img_base+2)
// writes the 16-bit code and its 8-bit copy to channel C_FEAT + j; the copy
// is the upper 8 bits rounded half up and saturated at 255.
// Host side: ld_en writes an input pixel to the original store and to bank 0;
// out_img returns the image codes of pixel out_pix of bank out_bank.
//
// Keeping whole frames on chip and the 8-bit copy rule are this design's
// choices; the 8-bit convolution inputs and 16-bit skip path follow the
// published network.
module fmap_buffer
  import nice_pkg::*;
#(
  parameter int unsigned MAX_H = 132,
  parameter int unsigned MAX_W = 220,
  parameter int unsigned LANES = 16,
  localparam int unsigned PIX  = MAX_H * MAX_W,
  localparam int unsigned PW   = $clog2(PIX),
  localparam int unsigned YW   = $clog2(MAX_H),
  localparam int unsigned XW   = $clog2(MAX_W),
  localparam int unsigned HW   = $clog2(MAX_H + 1),
  localparam int unsigned WW   = $clog2(MAX_W + 1)
) (
  input  logic                        clk,
  // frame size
  input  logic [HW-1:0]               img_h,
  input  logic [WW-1:0]               img_w,
  // window / skip read
  input  logic                        rd_bank,
  input  logic [CH_W-1:0]             rd_ch,
  input  logic [YW-1:0]               rd_y,
  input  logic [XW-1:0]               rd_x,
  input  logic                        skip_orig,
  output logic [KK-1:0][B_A-1:0]      win,
  output logic [C_IMG-1:0][B_IMG-1:0] skip_img,
  // result write
  input  logic                        wr_en,
  input  logic                        wr_bank,
  input  logic [PW-1:0]               wr_pix,
  input  logic [CH_W-1:0]             wr_ch_base,
  input  logic [CH_W-1:0]             wr_img_base,
  input  logic [LANES-1:0]            wr_mask,
  input  logic [LANES-1:0][B_IMG-1:0] wr_code,
  // host load / read
  input  logic                        ld_en,
  input  logic [PW-1:0]               ld_pix,
  input  logic [C_IMG-1:0][B_IMG-1:0] ld_img,
  input  logic                        out_bank,
  input  logic [PW-1:0]               out_pix,
  output logic [C_IMG-1:0][B_IMG-1:0] out_img
);

  logic [B_A-1:0]   act_mem  [2][PIX][C_ALL];
  logic [B_IMG-1:0] img_mem  [2][PIX][C_IMG];
  logic [B_IMG-1:0] orig_mem [PIX][C_IMG];

  function automatic logic [B_A-1:0] to_act(logic [B_IMG-1:0] c);
    logic [B_IMG:0] r;
    r = {1'b0, c} + (B_IMG + 1)'(1 << (B_IMG - B_A - 1));
    return (r[B_IMG:B_IMG-B_A] > (B_A + 1)'((1 << B_A) - 1)) ? '1 : r[B_IMG-1 -: B_A];
  endfunction

  // Window read with zero padding
  always_comb begin
    for (int dy = 0; dy < 3; dy++) begin
      for (int dx = 0; dx < 3; dx++) begin
        automatic int yy = int'(rd_y) + dy - 1;
        automatic int xx = int'(rd_x) + dx - 1;
        if (yy < 0 || xx < 0 || yy >= int'(img_h) || xx >= int'(img_w))
          win[dy*3+dx] = '0;
        else
          win[dy*3+dx] = act_mem[rd_bank][PW'(yy * int'(MAX_W) + xx)][rd_ch[$clog2(C_ALL)-1:0]];
      end
    end
  end

  logic [PW-1:0] rd_pix;
  assign rd_pix = PW'(int'(rd_y) * int'(MAX_W) + int'(rd_x));

  always_comb begin
    for (int j = 0; j < C_IMG; j++) begin
      skip_img[j] = skip_orig ? orig_mem[rd_pix][j] : img_mem[rd_bank][rd_pix][j];
      out_img[j]  = img_mem[out_bank][out_pix][j];
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int l = 0; l < LANES; l++) begin
        automatic int ch = int'(wr_ch_base) + l;
        automatic int j  = ch - int'(wr_img_base);
        if (wr_mask[l] && ch < int'(C_ALL)) begin
          if (j >= 0 && j < int'(C_IMG)) begin
            img_mem[wr_bank][wr_pix][j]          <= wr_code[l];
            act_mem[wr_bank][wr_pix][C_FEAT + j] <= to_act(wr_code[l]);
          end else begin
            act_mem[wr_bank][wr_pix][ch]         <= wr_code[l][B_A-1:0];
          end
        end
      end
    end
    if (ld_en) begin
      for (int j = 0; j < C_IMG; j++) begin
        orig_mem[ld_pix][j]             <= ld_img[j];
        img_mem[0][ld_pix][j]           <= ld_img[j];
        act_mem[0][ld_pix][C_FEAT + j]  <= to_act(ld_img[j]);
      end
    end
  end

endmodule

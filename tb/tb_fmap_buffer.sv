// tb_fmap_buffer: self-checking test of the feature-map buffer.
// A shadow copy of both banks is kept here. Random loads and multi-lane
// writes (ReLU and image channels) are applied; afterwards windows of random
// channels and centres, including every border pixel, are read for a frame
// smaller than the maximum and compared with the shadow copy, zero padding,
// the 8-bit copy rule of image channels and the skip / result read ports.
module tb_fmap_buffer;
  import nice_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned MAX_H = 6, MAX_W = 8, LANES = 4;
  localparam int unsigned PIX = MAX_H * MAX_W, PW = $clog2(PIX);

  logic clk = 0;
  logic [$clog2(MAX_H+1)-1:0] img_h;
  logic [$clog2(MAX_W+1)-1:0] img_w;
  logic rd_bank, skip_orig, wr_en, wr_bank, ld_en, out_bank;
  logic [CH_W-1:0] rd_ch, wr_ch_base, wr_img_base;
  logic [$clog2(MAX_H)-1:0] rd_y;
  logic [$clog2(MAX_W)-1:0] rd_x;
  logic [KK-1:0][B_A-1:0] win;
  logic [C_IMG-1:0][B_IMG-1:0] skip_img, ld_img, out_img;
  logic [PW-1:0] wr_pix, ld_pix, out_pix;
  logic [LANES-1:0] wr_mask;
  logic [LANES-1:0][B_IMG-1:0] wr_code;
  int checks = 0, failures = 0;

  fmap_buffer #(.MAX_H(MAX_H), .MAX_W(MAX_W), .LANES(LANES)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int act_s [2][PIX][C_ALL];
  int img_s [2][PIX][C_IMG];
  int orig_s [PIX][C_IMG];

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  int b;

  initial begin
    wr_en = 0; ld_en = 0; rd_bank = 0; skip_orig = 0; out_bank = 0;
    img_h = 5; img_w = 7; rd_ch = 0; rd_y = 0; rd_x = 0;
    wr_pix = 0; ld_pix = 0; out_pix = 0; wr_ch_base = 0; wr_img_base = 61; wr_mask = 0; wr_code = '0; ld_img = '0;
    // load every pixel, write every channel of both banks
    for (int p = 0; p < int'(PIX); p++) begin
      @(negedge clk);
      ld_en = 1; ld_pix = PW'(p);
      for (int j = 0; j < 3; j++) begin
        ld_img[j] = (p == 3) ? 16'hFFFF : 16'($urandom);
        orig_s[p][j] = int'(ld_img[j]); img_s[0][p][j] = int'(ld_img[j]);
        act_s[0][p][C_FEAT+j] = to_act(int'(ld_img[j]));
      end
    end
    @(negedge clk); ld_en = 0;
    for (int pass = 0; pass < 3; pass++)
      for (int p = 0; p < int'(PIX); p++)
        for (int g = 0; g < 16; g++) begin
          @(negedge clk);
          b = pass % 2;
          wr_en = 1; wr_bank = b[0]; wr_pix = PW'(p); wr_ch_base = CH_W'(g * LANES);
          wr_img_base = (pass == 2 && p % 5 == 0) ? 0 : 61;
          for (int l = 0; l < int'(LANES); l++) begin
            int ch, j;
            ch = g * LANES + l; j = ch - int'(wr_img_base);
            wr_mask[l] = ($urandom_range(0, 4) != 0) || (pass < 2);
            wr_code[l] = 16'($urandom);
            if (wr_mask[l]) begin
              if (j >= 0 && j < 3) begin
                img_s[b][p][j] = int'(wr_code[l]);
                act_s[b][p][C_FEAT+j] = to_act(int'(wr_code[l]));
              end else act_s[b][p][ch] = int'(wr_code[l][7:0]);
            end
          end
        end
    @(negedge clk); wr_en = 0;
    // windows
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      rd_bank = $urandom_range(0, 1); rd_ch = CH_W'($urandom_range(0, 63));
      rd_y = ($clog2(MAX_H))'($urandom_range(0, 4)); rd_x = ($clog2(MAX_W))'($urandom_range(0, 6));
      skip_orig = $urandom_range(0, 1);
      out_bank = $urandom_range(0, 1); out_pix = PW'($urandom_range(0, PIX - 1));
      #1;
      for (int dy = 0; dy < 3; dy++)
        for (int dx = 0; dx < 3; dx++) begin
          int yy, xx, e;
          yy = int'(rd_y) + dy - 1; xx = int'(rd_x) + dx - 1;
          e = (yy < 0 || xx < 0 || yy >= 5 || xx >= 7) ? 0 : act_s[rd_bank][yy*MAX_W+xx][rd_ch];
          chk(int'(win[dy*3+dx]), e, "window");
        end
      for (int j = 0; j < 3; j++) begin
        int p;
        p = int'(rd_y) * MAX_W + int'(rd_x);
        chk(int'(skip_img[j]), skip_orig ? orig_s[p][j] : img_s[rd_bank][p][j], "skip");
        chk(int'(out_img[j]), img_s[out_bank][out_pix][j], "out");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

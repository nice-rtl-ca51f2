// tb_nice_accel: end-to-end test of the engine at reduced size: 8 lanes, an
// 8 x 8 frame buffer running a 5 x 7 frame, and 4 layers (first, two middle
// and output layer), so every kind of layer, both skip sources, the bank swap
// and both clamps occur. See tb_nice_body.svh for what is checked.
module tb_nice_accel;
  import nice_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned LANES = 8, MAX_H = 8, MAX_W = 8, NL = 4;
  localparam int FH = 5, FW = 7;
  localparam int unsigned PW = $clog2(MAX_H * MAX_W);
  localparam int unsigned WDEPTH = net_weight_words(LANES);

  logic clk = 0, rst_n, start, busy, done;
  logic [$clog2(MAX_H+1)-1:0] img_h;
  logic [$clog2(MAX_W+1)-1:0] img_w;
  logic [31:0] cycles, stat_clip_lo, stat_clip_hi, stat_skip;
  logic ld_en, wt_we, bias_we, cfg_we;
  logic [PW-1:0] ld_pix, out_pix;
  logic [C_IMG-1:0][B_IMG-1:0] ld_img, out_img;
  logic [$clog2(WDEPTH)-1:0] wt_addr;
  logic [LANES-1:0][KK-1:0][B_W-1:0] wt_data;
  logic [$clog2(NL*C_ALL)-1:0] bias_addr;
  logic [B_B-1:0] bias_data;
  logic [$clog2(NL)-1:0] cfg_addr;
  layer_cfg_t cfg_data;

  nice_accel #(.LANES(LANES), .MAX_H(MAX_H), .MAX_W(MAX_W), .NL(NL)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

`include "tb/tb_nice_body.svh"

endmodule

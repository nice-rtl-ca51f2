// tb_nice_accel_full: end-to-end test of the engine with all parameters at
// their defaults (16 lanes, 132 x 220 frame buffer, 21 layers = 20 residual
// stages and the output convolution), running a 16 x 220 frame (full buffer
// width, so every column address and both side borders are used) through
// the whole network. See tb_nice_body.svh for what is checked.
module tb_nice_accel_full;
  import nice_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned LANES = 16, MAX_H = 132, MAX_W = 220, NL = 21;
  localparam int FH = 16, FW = 220;
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

  nice_accel dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (30000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

`include "tb/tb_nice_body.svh"

endmodule

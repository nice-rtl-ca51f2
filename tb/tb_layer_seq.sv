// tb_layer_seq: self-checking test of the layer sequencer.
// Three layers with different channel counts run on a 3 x 4 frame. Every
// issued step (window channel, pixel, group, weight address, first/last
// flags, bank) is compared with the loop nest computed here, no step may be
// issued during the drain, and the run must take exactly
// sum(H * W * ceil(cout / LANES) * cin + DRAIN) cycles. A second start must
// repeat the run.
module tb_layer_seq;
  import nice_pkg::*;

  localparam int unsigned LANES = 4, MAX_H = 4, MAX_W = 4, NL = 3, DRAIN = 3;

  logic clk = 0, rst_n = 0, start;
  logic [2:0] img_h, img_w;
  layer_cfg_t cfg;
  logic [1:0] layer;
  logic busy, done, step_valid, step_first, step_last, rd_bank;
  logic [31:0] cycles;
  logic [CH_W-1:0] rd_ch, grp_base;
  logic [1:0] rd_y, rd_x;
  logic [15:0] w_addr;
  int checks = 0, failures = 0;

  layer_seq #(.LANES(LANES), .MAX_H(MAX_H), .MAX_W(MAX_W), .NL(NL), .DRAIN(DRAIN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  layer_cfg_t tab [NL];
  always_comb cfg = tab[layer];

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    int total;
    start = 0; img_h = 3; img_w = 4;
    tab[0] = '0; tab[0].cin_base = 61; tab[0].cin_cnt = 3;  tab[0].cout_cnt = 10; tab[0].w_base = 0;
    tab[1] = '0; tab[1].cin_base = 0;  tab[1].cin_cnt = 5;  tab[1].cout_cnt = 8;  tab[1].w_base = 9;
    tab[2] = '0; tab[2].cin_base = 2;  tab[2].cin_cnt = 1;  tab[2].cout_cnt = 3;  tab[2].w_base = 19;
    total = 0;
    for (int l = 0; l < int'(NL); l++)
      total += 12 * ((int'(tab[l].cout_cnt) + LANES - 1) / LANES) * int'(tab[l].cin_cnt) + DRAIN;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      for (int l = 0; l < int'(NL); l++) begin
        int ng;
        ng = (int'(tab[l].cout_cnt) + LANES - 1) / LANES;
        for (int y = 0; y < 3; y++)
          for (int x = 0; x < 4; x++)
            for (int g = 0; g < ng; g++)
              for (int c = 0; c < int'(tab[l].cin_cnt); c++) begin
                chk(int'(step_valid), 1, "valid");
                chk(int'(layer), l, "layer");
                chk(int'(rd_bank), l % 2, "bank");
                chk(int'(rd_ch), int'(tab[l].cin_base) + c, "rd_ch");
                chk(int'(rd_y), y, "y");
                chk(int'(rd_x), x, "x");
                chk(int'(grp_base), g * LANES, "grp");
                chk(int'(w_addr), int'(tab[l].w_base) + g * int'(tab[l].cin_cnt) + c, "w_addr");
                chk(int'(step_first), int'(c == 0), "first");
                chk(int'(step_last), int'(c == int'(tab[l].cin_cnt) - 1), "last");
                @(negedge clk);
              end
        for (int d = 0; d < DRAIN; d++) begin
          chk(int'(step_valid), 0, "drain");
          chk(int'(busy), 1, "busy");
          @(negedge clk);
        end
      end
      chk(int'(done), 1, "done");
      chk(int'(busy), 0, "not busy");
      chk(int'(cycles), total, "cycles");
      $display("run %0d: %0d cycles (expected %0d)", run, cycles, total);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

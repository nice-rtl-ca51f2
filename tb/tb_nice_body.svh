// Body shared by the end-to-end testbenches of nice_accel. The including
// module defines LANES, MAX_H, MAX_W, NL (the engine's sizes), FH, FW (the
// frame that is run) and instantiates the engine as "dut".
//
// The test builds a network of NL layers shaped like the published one
// (first layer reads the 3 image channels, middle layers 64 -> 61 ReLU + 3
// image channels with the image skip, last layer 64 -> 3 with the skip from
// the original input), with random 4-bit weights, random biases and scale
// factors chosen so that values stay mostly in range. It loads everything
// through the host ports, runs the engine, and compares the output image
// with a layer-by-layer model computed here, along with the cycle count and
// the event counters (ReLU clamps, upper clamps, skip additions).

  int checks = 0, failures = 0;

  localparam int unsigned PIXT = MAX_H * MAX_W;

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 12) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Network description
  layer_cfg_t cfg_t [NL];
  int unsigned wbase [NL];
  byte         wt   [NL][C_ALL][C_ALL][KK];   // [layer][out ch][in ch index][tap]
  int          bs   [NL][C_ALL];

  // Reference state
  int ract  [2][PIXT][C_ALL];
  int rimg  [2][PIXT][C_IMG];
  int rorig [PIXT][C_IMG];
  int exp_lo = 0, exp_hi = 0, exp_skip = 0;
  longint exp_cycles = 0;

  task automatic build_network();
    int unsigned wa;
    wa = 0;
    for (int l = 0; l < int'(NL); l++) begin
      layer_cfg_t c;
      c = '0;
      if (l == 0) begin
        c.cin_base = CH_W'(C_FEAT); c.cin_cnt = CH_W'(C_IMG); c.cout_cnt = CH_W'(C_ALL);
        c.img_base = CH_W'(C_FEAT); c.skip_orig = 1'b0;
        c.m_act = '{q: 9'($urandom_range(160, 256)), shr: 6'd12};
      end else if (l == int'(NL) - 1) begin
        c.cin_base = 0; c.cin_cnt = CH_W'(C_ALL); c.cout_cnt = CH_W'(C_IMG);
        c.img_base = 0; c.skip_orig = 1'b1;
        c.m_act = '{q: 9'($urandom_range(160, 256)), shr: 6'd14};
      end else begin
        c.cin_base = 0; c.cin_cnt = CH_W'(C_ALL); c.cout_cnt = CH_W'(C_ALL);
        c.img_base = CH_W'(C_FEAT); c.skip_orig = 1'b0;
        c.m_act = '{q: 9'($urandom_range(160, 256)), shr: 6'd14};
      end
      c.m_img  = '{q: 9'($urandom_range(64, 256)), shr: 6'd9};
      c.s_skip = (l % 2) ? '{q: 9'd256, shr: 6'd8} : '{q: 9'($urandom_range(200, 256)), shr: 6'd8};
      c.w_base = 16'(wa);
      wbase[l] = wa;
      wa += ((int'(c.cout_cnt) + LANES - 1) / LANES) * int'(c.cin_cnt);
      cfg_t[l] = c;
      for (int o = 0; o < int'(C_ALL); o++) begin
        bs[l][o] = int'($urandom_range(0, 8000)) - 3000;
        for (int i = 0; i < int'(C_ALL); i++)
          for (int k = 0; k < int'(KK); k++)
            wt[l][o][i][k] = byte'(int'($urandom_range(0, 14)) - 7);
      end
    end
  endtask

  // Layer-by-layer reference model
  task automatic run_reference();
    for (int l = 0; l < int'(NL); l++) begin
      int rb, wb, ng;
      layer_cfg_t c;
      c  = cfg_t[l];
      rb = l % 2;
      wb = 1 - rb;
      ng = (int'(c.cout_cnt) + LANES - 1) / LANES;
      exp_cycles += longint'(FH * FW * ng * int'(c.cin_cnt) + 3);
      for (int y = 0; y < FH; y++)
        for (int x = 0; x < FW; x++) begin
          int p;
          p = y * MAX_W + x;
          for (int o = 0; o < int'(c.cout_cnt); o++) begin
            longint acc;
            int j;
            rq_t r;
            acc = 0;
            for (int i = 0; i < int'(c.cin_cnt); i++)
              for (int dy = 0; dy < 3; dy++)
                for (int dx = 0; dx < 3; dx++) begin
                  int yy, xx;
                  yy = y + dy - 1; xx = x + dx - 1;
                  if (yy >= 0 && xx >= 0 && yy < FH && xx < FW)
                    acc += longint'(ract[rb][yy*MAX_W+xx][int'(c.cin_base)+i]) * longint'(wt[l][o][i][dy*3+dx]);
                end
            j = o - int'(c.img_base);
            if (j >= 0 && j < int'(C_IMG)) begin
              r = requant(acc, int'(c.m_img.q), int'(c.m_img.shr), bs[l][o], 1'b1,
                          c.skip_orig ? rorig[p][j] : rimg[rb][p][j],
                          int'(c.s_skip.q), int'(c.s_skip.shr), 1'b1);
              rimg[wb][p][j] = int'(r.code);
              ract[wb][p][C_FEAT+j] = to_act(int'(r.code));
              exp_skip++;
            end else begin
              r = requant(acc, int'(c.m_act.q), int'(c.m_act.shr), bs[l][o], 1'b0, 0, 1, 0, 1'b0);
              ract[wb][p][o] = int'(r.code);
            end
            if (r.lo) exp_lo++;
            if (r.hi) exp_hi++;
          end
        end
    end
  endtask

  initial begin
    int res_bank, n_border;
    rst_n = 0; start = 0; ld_en = 0; wt_we = 0; bias_we = 0; cfg_we = 0;
    ld_pix = '0; ld_img = '0; wt_addr = '0; wt_data = '0; bias_addr = '0; bias_data = '0;
    cfg_addr = '0; cfg_data = '0; out_pix = '0;
    img_h = ($bits(img_h))'(FH); img_w = ($bits(img_w))'(FW);
    build_network();
    repeat (3) @(posedge clk);
    rst_n = 1;
    // image: mostly mid-range, a few saturated and dark pixels
    for (int y = 0; y < FH; y++)
      for (int x = 0; x < FW; x++) begin
        int p;
        p = y * MAX_W + x;
        @(negedge clk);
        ld_en = 1; ld_pix = ($bits(ld_pix))'(p);
        for (int j = 0; j < int'(C_IMG); j++) begin
          int v;
          v = (x == 1 && y == 0) ? 65535 : (x == 2 && y == 0) ? 0 : int'($urandom_range(4000, 60000));
          ld_img[j] = 16'(v);
          rorig[p][j] = v; rimg[0][p][j] = v; ract[0][p][C_FEAT+j] = to_act(v);
        end
      end
    @(negedge clk); ld_en = 0;
    // parameters
    for (int l = 0; l < int'(NL); l++) begin
      int ng;
      @(negedge clk);
      cfg_we = 1; cfg_addr = ($bits(cfg_addr))'(l); cfg_data = cfg_t[l];
      for (int o = 0; o < int'(C_ALL); o++) begin
        @(negedge clk);
        cfg_we = 0;
        bias_we = 1; bias_addr = ($bits(bias_addr))'(l * int'(C_ALL) + o); bias_data = 16'(bs[l][o]);
      end
      @(negedge clk); bias_we = 0;
      ng = (int'(cfg_t[l].cout_cnt) + LANES - 1) / LANES;
      for (int g = 0; g < ng; g++)
        for (int i = 0; i < int'(cfg_t[l].cin_cnt); i++) begin
          @(negedge clk);
          wt_we = 1; wt_addr = ($bits(wt_addr))'(wbase[l] + g * int'(cfg_t[l].cin_cnt) + i);
          for (int ln = 0; ln < int'(LANES); ln++)
            for (int k = 0; k < int'(KK); k++) begin
              int o;
              o = g * LANES + ln;
              wt_data[ln][k] = (o < int'(C_ALL)) ? 4'(wt[l][o][i][k]) : 4'd0;
            end
        end
      @(negedge clk); wt_we = 0;
    end
    run_reference();
    // run
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    chk(busy, 1, "busy after start");
    wait (done);
    @(negedge clk);
    chk(cycles, exp_cycles, "cycle count");
    $display("run: %0d cycles for %0d layers on a %0d x %0d frame (expected %0d)",
             cycles, NL, FH, FW, exp_cycles);
    res_bank = int'(NL) % 2;
    for (int y = 0; y < FH; y++)
      for (int x = 0; x < FW; x++) begin
        out_pix = ($bits(out_pix))'(y * MAX_W + x);
        #1;
        for (int j = 0; j < int'(C_IMG); j++)
          chk(out_img[j], rimg[res_bank][y*MAX_W+x][j], $sformatf("pixel (%0d,%0d) ch %0d", y, x, j));
      end
    // mechanisms
    n_border = 2 * FW + 2 * FH - 4;
    $display("events: ReLU clamps %0d, upper clamps %0d, skip additions %0d, bank swaps %0d, border pixels per layer %0d",
             stat_clip_lo, stat_clip_hi, stat_skip, NL - 1, n_border);
    chk(stat_clip_lo, exp_lo, "ReLU clamp count");
    chk(stat_clip_hi, exp_hi, "upper clamp count");
    chk(stat_skip, exp_skip, "skip addition count");
    if (stat_clip_lo == 0) begin failures++; $display("FAIL ReLU clamp never happened"); end
    if (stat_clip_hi == 0) begin failures++; $display("FAIL upper clamp never happened"); end
    if (stat_skip == 0)    begin failures++; $display("FAIL skip addition never happened"); end
    if (NL < 3)            begin failures++; $display("FAIL fewer than three layer kinds run"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

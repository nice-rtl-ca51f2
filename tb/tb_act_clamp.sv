// tb_act_clamp: self-checking test of the clamped ReLU.
// Values around 0, around the 8-bit and 16-bit bounds and at random are
// applied in both modes; the output must be min(max(x, 0), (2^B - 1) * 2^32)
// with B = 8 or 16, and the clip flags must mark which bound applied.
module tb_act_clamp;
  import nice_pkg::*;

  logic signed [SUM_W-1:0] x, y;
  logic img_mode, clip_lo, clip_hi;
  int checks = 0, failures = 0;

  act_clamp dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      logic signed [127:0] hi, e, xv;
      logic el, eh;
      img_mode = i[0];
      hi = ((128'sd1 <<< (img_mode ? 16 : 8)) - 1) <<< 32;
      case (i % 6)
        0: xv = -1;
        1: xv = 0;
        2: xv = hi + 128'($signed(int'($urandom_range(0, 4)) - 2));
        3: xv = 128'($signed({$urandom, $urandom})) >>> int'($urandom_range(0, 40));
        4: xv = 128'($urandom) * (128'sd1 <<< int'($urandom_range(0, 30)));
        default: xv = -(128'($urandom) <<< 20);
      endcase
      x = SUM_W'(xv);
      #1;
      el = xv < 0;
      eh = xv > hi;
      e  = el ? 0 : eh ? hi : xv;
      checks++;
      if (128'(y) != e || clip_lo != el || clip_hi != eh) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d mode=%0d y=%0d exp=%0d lo=%0b hi=%0b", xv, img_mode, y, e, clip_lo, clip_hi);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

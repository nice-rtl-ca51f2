// tb_skip_scale: self-checking test of the skip-path rescaling multiplier.
// Random 16-bit codes and scales q in [1,256], shifts in [0,32] (plus the
// corner values) are applied; the output must equal x * q * 2^(32 - shr),
// computed here with 128-bit arithmetic.
module tb_skip_scale;
  import nice_pkg::*;

  logic [B_IMG-1:0] x;
  scale_t           s;
  logic signed [SKIP_W-1:0] y;
  int checks = 0, failures = 0;

  skip_scale dut (.x(x), .s(s), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      logic signed [127:0] e;
      x    = (i % 10 == 0) ? 16'hFFFF : 16'($urandom);
      s.q  = (i % 10 == 1) ? 9'd256 : 9'($urandom_range(1, 256));
      s.shr = (i % 10 == 2) ? 6'd0 : (i % 10 == 3) ? 6'd32 : 6'($urandom_range(0, 32));
      #1;
      e = (128'(x) * 128'(s.q)) << (32 - int'(s.shr));
      checks++;
      if (128'(y) != e) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d q=%0d shr=%0d y=%0d exp=%0d", x, s.q, s.shr, y, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

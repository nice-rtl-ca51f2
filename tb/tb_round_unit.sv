// tb_round_unit: self-checking test of the rounding stage.
// Clamped values (0 .. 65535 * 2^32) with fractions just below, at and above
// one half, plus random fractions, must round to the nearest integer with
// ties going up.
module tb_round_unit;
  import nice_pkg::*;

  logic signed [SUM_W-1:0] x;
  logic [B_IMG-1:0] y;
  int checks = 0, failures = 0;

  round_unit dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      longint ip;
      longint fr;
      int e;
      ip = (i % 50 == 0) ? 65535 : (i % 50 == 1) ? 0 : longint'($urandom_range(0, 65534));
      case (i % 4)
        0: fr = 64'h80000000;
        1: fr = 64'h7FFFFFFF;
        2: fr = 64'h80000001;
        default: fr = longint'($urandom);
      endcase
      if (ip == 65535) fr = 0;
      x = SUM_W'(ip) * (SUM_W'(1) << 32) + SUM_W'(fr);
      #1;
      e = int'(ip) + ((fr >= 64'h80000000) ? 1 : 0);
      checks++;
      if (int'(y) != e) begin
        failures++;
        if (failures < 10) $display("FAIL ip=%0d fr=%h y=%0d exp=%0d", ip, fr, y, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_dsp_scale_add: self-checking test of the multiply-add block.
// For random signed sums, scales, biases and skip terms the output must equal
// acc * q * 2^(32 - shr) + bias * 2^24 + skip, computed here in 128-bit
// signed arithmetic; extreme sums and scales are included.
module tb_dsp_scale_add;
  import nice_pkg::*;

  logic signed [ACC_W-1:0]  acc;
  scale_t                   m;
  logic signed [B_B-1:0]    bias;
  logic signed [SKIP_W-1:0] skip;
  logic signed [SUM_W-1:0]  y;
  int checks = 0, failures = 0;

  dsp_scale_add dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      logic signed [127:0] e;
      case (i % 8)
        0: acc = 32'sh7FFFFFFF;
        1: acc = -32'sh80000000;
        default: acc = (i % 2) ? $signed(32'($urandom_range(0, 400000)) - 32'd200000) : $signed($urandom);
      endcase
      m.q  = (i % 8 < 2) ? 9'd256 : 9'($urandom_range(1, 256));
      m.shr = (i % 8 < 2) ? 6'd0 : 6'($urandom_range(0, 32));
      bias = $signed(16'($urandom));
      skip = (i % 3 == 0) ? '0 : $signed(SKIP_W'({$urandom, $urandom}) >> 1);
      #1;
      e = (128'(acc) * 128'($signed({1'b0, m.q}))) * (128'sd1 <<< (32 - int'(m.shr)))
          + 128'(bias) * (128'sd1 <<< 24) + 128'(skip);
      checks++;
      if (128'(y) != e) begin
        failures++;
        if (failures < 10) $display("FAIL acc=%0d q=%0d shr=%0d b=%0d y=%0d exp=%0d", acc, m.q, m.shr, bias, y, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

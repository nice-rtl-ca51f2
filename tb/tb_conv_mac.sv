// tb_conv_mac: self-checking test of the convolution MAC block.
// Random windows and signed 4-bit kernels are fed in groups of 1..70 input
// channels, back to back (in_first of the next group right after in_last).
// Each finished sum is compared with a sum of products computed here, and
// out_valid must rise exactly one cycle after the in_last step.
module tb_conv_mac;
  import nice_pkg::*;

  localparam int unsigned LANES = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_first, in_last;
  logic [KK-1:0][B_A-1:0] win;
  logic [LANES-1:0][KK-1:0][B_W-1:0] wts;
  logic out_valid;
  logic [LANES-1:0][ACC_W-1:0] acc;

  int checks = 0, failures = 0;

  conv_mac #(.LANES(LANES)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint ref_acc [LANES];
  longint exp_acc [LANES];
  bit     expect_valid;

  // Check outputs every cycle
  always @(posedge clk) begin
    if (rst_n) begin
      #1;
      checks++;
      if (out_valid !== expect_valid) begin
        failures++;
        $display("FAIL out_valid=%0b expected %0b at %0t", out_valid, expect_valid, $time);
      end
      if (expect_valid) begin
        for (int l = 0; l < LANES; l++) begin
          checks++;
          if ($signed(acc[l]) != exp_acc[l]) begin
            failures++;
            $display("FAIL lane %0d acc=%0d expected %0d", l, $signed(acc[l]), exp_acc[l]);
          end
        end
      end
    end
  end

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; win = '0; wts = '0;
    expect_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int grp = 0; grp < 60; grp++) begin
      int n;
      n = (grp % 5 == 0) ? 1 : 1 + int'($urandom_range(0, 69));
      for (int c = 0; c < n; c++) begin
        @(negedge clk);
        // occasional idle cycle inside a group
        if ($urandom_range(0, 7) == 0) begin
          in_valid = 0;
          @(posedge clk); expect_valid = 0;
          @(negedge clk);
        end
        in_valid = 1; in_first = (c == 0); in_last = (c == n - 1);
        for (int k = 0; k < KK; k++) win[k] = (grp % 7 == 3) ? 8'hFF : 8'($urandom);
        for (int l = 0; l < LANES; l++)
          for (int k = 0; k < KK; k++) begin
            int w;
            w = (grp % 7 == 3) ? -7 : int'($urandom_range(0, 14)) - 7;
            wts[l][k] = 4'(w);
          end
        for (int l = 0; l < LANES; l++) begin
          longint d;
          d = 0;
          for (int k = 0; k < KK; k++) d += longint'(win[k]) * longint'($signed(wts[l][k]));
          ref_acc[l] = (c == 0) ? d : ref_acc[l] + d;
        end
        @(posedge clk);
        expect_valid = in_last;
        if (in_last) for (int l = 0; l < LANES; l++) exp_acc[l] = ref_acc[l];
      end
    end
    @(negedge clk); in_valid = 0;
    @(posedge clk); expect_valid = 0;
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

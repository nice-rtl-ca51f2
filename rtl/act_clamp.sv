// act_clamp: clamped ReLU applied in the integer code domain.
//
// With the activation scale S_a = c_a / (2^B - 1), clamping the real value to
// [0, c_a] is the same as clamping the code to [0, 2^B - 1]. The input is a
// signed fixed-point value with FRAC = 32 fraction bits; the output is the
// same value limited to [0, (2^B - 1) * 2^FRAC]. B is B_A = 8 for the ReLU
// channels and B_IMG = 16 for the image channels (img_mode = 1), whose
// convolution has no activation but whose result must still fit a 16-bit
// image code. clip_lo / clip_hi report which bound was applied.
// Purely combinational.
module act_clamp
  import nice_pkg::*;
(
  input  logic signed [SUM_W-1:0] x,
  input  logic                    img_mode,
  output logic signed [SUM_W-1:0] y,
  output logic                    clip_lo,
  output logic                    clip_hi
);

  localparam logic signed [SUM_W-1:0] MAX_ACT = SUM_W'((1 << B_A) - 1) << FRAC;
  localparam logic signed [SUM_W-1:0] MAX_IMG = SUM_W'((1 << B_IMG) - 1) << FRAC;

  logic signed [SUM_W-1:0] hi;

  always_comb begin
    hi      = img_mode ? MAX_IMG : MAX_ACT;
    clip_lo = x < 0;
    clip_hi = x > hi;
    if (clip_lo)      y = '0;
    else if (clip_hi) y = hi;
    else              y = x;
  end

endmodule

// round_unit: rounds a clamped fixed-point value to an integer code.
//
// The input is non-negative (it comes from act_clamp) with FRAC = 32 fraction
// bits and at most (2^16 - 1) * 2^FRAC. The output is the nearest integer,
// ties rounded up: y = floor(x / 2^FRAC + 1/2). Because the input was clamped
// first, the result never exceeds the clamp bound. Purely combinational.
// Round-to-nearest follows the published quantizer; the tie rule is this
// design's choice.
module round_unit
  import nice_pkg::*;
(
  input  logic signed [SUM_W-1:0] x,
  output logic [B_IMG-1:0]        y
);

  logic [SUM_W-1:0] t;

  assign t = $unsigned(x) + (SUM_W'(1) << (FRAC - 1));
  assign y = t[FRAC +: B_IMG];

endmodule

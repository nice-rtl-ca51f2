// skip_scale: rescales a skip-connection code into the output layer's scale.
//
// The residual path carries the previous layer's code x, whose real value is
// x * S_in. To add it to the current layer's output it must be expressed in
// units of the output scale S_out, i.e. multiplied by S_in / S_out. That ratio
// is stored as q * 2^-shr (q in [1,256], shr in [0,32]). The product is returned
// as a fixed-point number with FRAC = 32 fraction bits:
//
//     y = x * q * 2^(FRAC - shr)
//
// which is exact for every allowed shr (shift amounts above FRAC are treated
// as FRAC). Purely combinational. The multiply by the scale ratio follows the
// published datapath; the 32-bit fraction alignment is this design's choice.
module skip_scale
  import nice_pkg::*;
#(
  parameter int unsigned IN_W = B_IMG
) (
  input  logic [IN_W-1:0]           x,
  input  scale_t                    s,
  output logic signed [SKIP_W-1:0]  y
);

  logic [IN_W+Q_W-1:0] prod;
  logic [SH_W-1:0]     lsh;

  assign prod = IN_W'(x) * s.q;
  assign lsh  = (s.shr > SH_W'(FRAC)) ? '0 : SH_W'(FRAC) - s.shr;
  assign y    = $signed(SKIP_W'(prod) << lsh);

endmodule

// dsp_scale_add: the "single DSP block" of the requantization path.
//
// It multiplies the signed convolution sum acc (units S_{a,l-1} * S_{w,l}) by
// the layer's combined scale M = S_{a,l-1} S_{w,l} / S_{a,l}, held as
// q * 2^-shr, and adds two terms already expressed in output units: the bias
// Bias_l / S_{a,l} (a signed 16-bit value with BIAS_FRAC = 8 fraction bits,
// computed off-line) and the rescaled skip term from skip_scale. The result
// is a signed fixed-point value with FRAC = 32 fraction bits:
//
//     y = acc * q * 2^(FRAC - shr) + bias * 2^(FRAC - BIAS_FRAC) + skip
//
// Purely combinational; the pipeline register that follows it lives in
// requant_path. The multiply-then-add structure and the operands follow the
// published datapath; the bias format and the 32-bit fraction alignment are
// this design's choices.
module dsp_scale_add
  import nice_pkg::*;
(
  input  logic signed [ACC_W-1:0]  acc,
  input  scale_t                   m,
  input  logic signed [B_B-1:0]    bias,
  input  logic signed [SKIP_W-1:0] skip,
  output logic signed [SUM_W-1:0]  y
);

  logic signed [ACC_W+Q_W:0] prod;
  logic [SH_W-1:0]           lsh;
  logic signed [SUM_W-1:0]   prod_fx;
  logic signed [SUM_W-1:0]   bias_fx;

  assign prod    = acc * $signed({1'b0, m.q});
  assign lsh     = (m.shr > SH_W'(FRAC)) ? '0 : SH_W'(FRAC) - m.shr;
  assign prod_fx = SUM_W'(prod) <<< lsh;
  assign bias_fx = SUM_W'(bias) <<< (FRAC - BIAS_FRAC);
  assign y       = prod_fx + bias_fx + SUM_W'(skip);

endmodule

// nice_pkg: widths, network constants and shared types of the quantized
// denoising/demosaicing inference engine.
//
// Numbers that follow the published design: 4-bit weights, 8-bit activations,
// 16-bit biases and 16-bit input image, scale factors of the form q * 2^p with
// q in [1,256] and p in [-32,0], a network of NU = 20 residual stages of
// 61 ReLU channels plus 3 image channels, followed by an output convolution.
// Everything else here (accumulator width, bias fraction bits, the fixed-point
// alignment of 32 fraction bits, the layer-configuration record) is this
// design's own choice.
package nice_pkg;

  // Quantization bit widths
  localparam int unsigned B_W   = 4;    // weight code bits (signed)
  localparam int unsigned B_A   = 8;    // activation code bits (unsigned)
  localparam int unsigned B_B   = 16;   // bias bits (signed)
  localparam int unsigned B_IMG = 16;   // image code bits (unsigned)

  // Scale factor S = q * 2^p, q in [1,256], p = -shr, shr in [0,32]
  localparam int unsigned Q_W   = 9;
  localparam int unsigned SH_W  = 6;
  localparam int unsigned FRAC  = 32;   // fraction bits of the requantization sum

  localparam int unsigned BIAS_FRAC = 8; // fraction bits of Bias/S_a
  localparam int unsigned ACC_W     = 32;

  // Width of the fixed-point requantization sum (sign + integer + FRAC)
  localparam int unsigned SUM_W = ACC_W + Q_W + FRAC + 3;
  // Width of the scaled skip term
  localparam int unsigned SKIP_W = B_IMG + Q_W + FRAC + 1;

  // Network of the regression task
  localparam int unsigned KK         = 9;   // 3x3 kernel taps
  localparam int unsigned NU         = 20;  // residual stages
  localparam int unsigned C_FEAT     = 61;  // ReLU channels per stage
  localparam int unsigned C_IMG      = 3;   // image channels
  localparam int unsigned C_ALL      = C_FEAT + C_IMG;
  localparam int unsigned NUM_LAYERS = NU + 1;
  localparam int unsigned CH_W       = 7;   // holds 0..64

  typedef struct packed {
    logic [Q_W-1:0]  q;   // 1..256
    logic [SH_W-1:0] shr;  // 0..32, p = -shr
  } scale_t;

  // Per-layer configuration record, written by the host
  typedef struct packed {
    logic [CH_W-1:0] cin_base;  // first input channel read
    logic [CH_W-1:0] cin_cnt;   // number of input channels
    logic [CH_W-1:0] cout_cnt;  // number of output channels
    logic [CH_W-1:0] img_base;  // first output channel that is an image channel
    logic            skip_orig; // image skip taken from the original input
    logic [15:0]     w_base;    // first weight word of the layer
    scale_t          m_act;     // S_{a,l-1} S_{w,l} / S_{a,l} of ReLU channels
    scale_t          m_img;     // same for image channels
    scale_t          s_skip;    // S_{img,l-1} / S_{img,l} of the skip path
  } layer_cfg_t;

  // Weight words needed by the network for a given number of lanes
  function automatic int unsigned net_weight_words(int unsigned lanes);
    int unsigned g;
    g = (C_ALL + lanes - 1) / lanes;
    return g * C_IMG + (NU - 1) * g * C_ALL + ((C_IMG + lanes - 1) / lanes) * C_ALL;
  endfunction

endpackage

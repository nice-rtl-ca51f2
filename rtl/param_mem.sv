// param_mem: on-chip store of the network parameters.
//
// Three arrays, each written by the host one entry per cycle and read
// combinationally by the engine:
//   * weights: WDEPTH words; a word holds, for one input channel, the 3x3
//     kernels of LANES output channels (LANES * 9 signed 4-bit codes; lane l,
//     tap k at bits [(l*9+k)*4 +: 4]).
//   * biases: one signed 16-bit Bias/S_a value per output channel and layer,
//     at address layer * 64 + channel. A read returns LANES consecutive
//     entries starting at bias_raddr (zero past the end).
//   * layer configuration: one layer_cfg_t per layer, holding the scale
//     factors q * 2^p of the layer and its channel ranges.
// All factors are computed off-line, as in the published flow; the word
// layout and write ports are this design's choices. The arrays are not reset.
module param_mem
  import nice_pkg::*;
#(
  parameter int unsigned LANES  = 16,
  parameter int unsigned WDEPTH = net_weight_words(16),
  parameter int unsigned NL     = NUM_LAYERS,
  localparam int unsigned WA    = $clog2(WDEPTH),
  localparam int unsigned BDEPTH = NL * C_ALL,
  localparam int unsigned BA    = $clog2(BDEPTH),
  localparam int unsigned LA    = $clog2(NL)
) (
  input  logic                               clk,
  input  logic                               wt_we,
  input  logic [WA-1:0]                      wt_addr,
  input  logic [LANES-1:0][KK-1:0][B_W-1:0]  wt_data,
  input  logic                               bias_we,
  input  logic [BA-1:0]                      bias_addr,
  input  logic [B_B-1:0]                     bias_data,
  input  logic                               cfg_we,
  input  logic [LA-1:0]                      cfg_addr,
  input  layer_cfg_t                         cfg_data,
  input  logic [WA-1:0]                      wt_raddr,
  output logic [LANES-1:0][KK-1:0][B_W-1:0]  wt_rdata,
  input  logic [BA-1:0]                      bias_raddr,
  output logic [LANES-1:0][B_B-1:0]          bias_rdata,
  input  logic [LA-1:0]                      cfg_raddr,
  output layer_cfg_t                         cfg_rdata
);

  logic [LANES*KK*B_W-1:0] wt_mem   [WDEPTH];
  logic [B_B-1:0]          bias_mem [BDEPTH];
  layer_cfg_t              cfg_mem  [NL];

  always_ff @(posedge clk) begin
    if (wt_we)   wt_mem[wt_addr]     <= wt_data;
    if (bias_we) bias_mem[bias_addr] <= bias_data;
    if (cfg_we)  cfg_mem[cfg_addr]   <= cfg_data;
  end

  assign wt_rdata  = wt_mem[wt_raddr];
  assign cfg_rdata = cfg_mem[cfg_raddr];

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      automatic int a = int'(bias_raddr) + l;
      bias_rdata[l] = (a < int'(BDEPTH)) ? bias_mem[BA'(a)] : '0;
    end
  end

endmodule

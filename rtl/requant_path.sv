// requant_path: the per-channel path from a convolution sum to an output code.
//
// For each of LANES output channels it computes
//
//     code = Round( Clamp( acc * M + Bias/S_a + skip * S_skip , 0, 2^B - 1 ) )
//
// with all scale factors in the q * 2^p form, so only integer multipliers,
// shifts and adders are used. A lane with m_sel = 1 is an image channel: it
// uses the image scale m_img, the 16-bit range and, if skip_en is set, the
// 16-bit skip code rescaled by s_skip. Other lanes use m_act and the 8-bit
// activation range (clamped ReLU).
//
// Timing: two pipeline stages. Inputs sampled with in_valid appear on code,
// clip_lo and clip_hi with out_valid two cycles later; tag is a free field
// carried alongside (the sequencer uses it for the write address). A new set
// of sums may enter every cycle.
//
// The order multiply, add, clamp + ReLU, round follows the published residual
// block; the pipeline depth and the two per-layer scales are this design's.
module requant_path
  import nice_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned TAG_W = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [TAG_W-1:0]              in_tag,
  input  logic [LANES-1:0][ACC_W-1:0]   acc,
  input  logic [LANES-1:0][B_B-1:0]     bias,
  input  logic [LANES-1:0]              m_sel,
  input  scale_t                        m_act,
  input  scale_t                        m_img,
  input  logic [LANES-1:0][B_IMG-1:0]   skip,
  input  logic [LANES-1:0]              skip_en,
  input  scale_t                        s_skip,
  output logic                          out_valid,
  output logic [TAG_W-1:0]              out_tag,
  output logic [LANES-1:0][B_IMG-1:0]   code,
  output logic [LANES-1:0]              clip_lo,
  output logic [LANES-1:0]              clip_hi
);

  // Stage 1: multiply and add (the DSP block)
  logic [LANES-1:0][SKIP_W-1:0] skip_fx;
  logic [LANES-1:0][SUM_W-1:0]  sum;
  logic [LANES-1:0][SUM_W-1:0]  sum_q;
  logic [LANES-1:0]             sel_q;
  logic                         v1_q;
  logic [TAG_W-1:0]             tag1_q;

  // Stage 2: clamp + ReLU, round
  logic [LANES-1:0][SUM_W-1:0]  clamped;
  logic [LANES-1:0][B_IMG-1:0]  rounded;
  logic [LANES-1:0]             lo, hi;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [SKIP_W-1:0] skip_raw;

    skip_scale #(.IN_W(B_IMG)) u_skip (
      .x(skip[l]), .s(s_skip), .y(skip_raw)
    );
    assign skip_fx[l] = skip_en[l] ? skip_raw : '0;

    dsp_scale_add u_dsp (
      .acc  (acc[l]),
      .m    (m_sel[l] ? m_img : m_act),
      .bias (bias[l]),
      .skip (skip_fx[l]),
      .y    (sum[l])
    );

    act_clamp u_clamp (
      .x(sum_q[l]), .img_mode(sel_q[l]), .y(clamped[l]), .clip_lo(lo[l]), .clip_hi(hi[l])
    );

    round_unit u_round (
      .x(clamped[l]), .y(rounded[l])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1_q      <= 1'b0;
      out_valid <= 1'b0;
      sum_q     <= '0;
      sel_q     <= '0;
      tag1_q    <= '0;
      out_tag   <= '0;
      code      <= '0;
      clip_lo   <= '0;
      clip_hi   <= '0;
    end else begin
      v1_q      <= in_valid;
      out_valid <= v1_q;
      if (in_valid) begin
        sum_q  <= sum;
        sel_q  <= m_sel;
        tag1_q <= in_tag;
      end
      if (v1_q) begin
        code    <= rounded;
        clip_lo <= lo;
        clip_hi <= hi;
        out_tag <= tag1_q;
      end
    end
  end

endmodule

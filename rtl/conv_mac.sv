// conv_mac: the convolution multiply-accumulate block.
//
// Each valid cycle it takes the zero-padded 3x3 window of one input channel
// (nine unsigned B_A-bit activation codes) and, for each of LANES output
// channels, a 3x3 kernel of signed B_W-bit weight codes. Every lane adds the
// nine products to its accumulator; with in_first the accumulator is loaded
// instead of added to, so consecutive output pixels need no bubble. The cycle
// after a step flagged in_last, out_valid is high for one cycle and acc holds
// the finished sums (held until the next in_last step completes).
//
// The block's place in the datapath (integer products of activation and
// weight codes feeding the requantization multiplier) follows the published
// design; the window-per-cycle organisation, the lane count and the
// accumulator width are this design's choices.
module conv_mac
  import nice_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic                              in_first,
  input  logic                              in_last,
  input  logic [KK-1:0][B_A-1:0]            win,
  input  logic [LANES-1:0][KK-1:0][B_W-1:0] wts,
  output logic                              out_valid,
  output logic [LANES-1:0][ACC_W-1:0]       acc
);

  logic [LANES-1:0][ACC_W-1:0] acc_q;
  logic [LANES-1:0][ACC_W-1:0] dot;
  logic [LANES-1:0][ACC_W-1:0] nxt;
  logic [LANES-1:0][ACC_W-1:0] res_q;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      dot[l] = '0;
      for (int k = 0; k < KK; k++)
        dot[l] = dot[l] + ACC_W'($signed({1'b0, win[k]}) * $signed(wts[l][k]));
      nxt[l] = in_first ? dot[l] : acc_q[l] + dot[l];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_q     <= '0;
      res_q     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        acc_q <= nxt;
        if (in_last) res_q <= nxt;
      end
    end
  end

  assign acc = res_q;

endmodule

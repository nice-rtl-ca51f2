// layer_seq: sequencer of the layer-by-layer engine.
//
// After start it runs NL layers one after the other. For each layer it walks
// the pixels of the img_h x img_w frame in raster order, for each pixel the
// groups of LANES output channels, and for each group the layer's input
// channels, issuing one multiply-accumulate step per cycle: window channel
// cin_base + c at pixel (y, x) and weight word w_base + g * cin_cnt + c.
// The first and last steps of a group are flagged for conv_mac. After the
// last step of a layer it waits DRAIN cycles, until the final results have
// passed the requantization pipeline and been written, then moves to the
// next layer, whose read bank is the previous write bank (bank = layer bit 0).
//
// Timing: one step per cycle without stalls, so a layer takes
// img_h * img_w * ceil(cout_cnt / LANES) * cin_cnt + DRAIN cycles; cycles
// reports the count of the last run from start to done. done stays high
// until the next start. The loop order and the drain are this design's own
// schedule.
module layer_seq
  import nice_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned MAX_H = 132,
  parameter int unsigned MAX_W = 220,
  parameter int unsigned NL    = NUM_LAYERS,
  parameter int unsigned DRAIN = 3,
  localparam int unsigned YW   = $clog2(MAX_H),
  localparam int unsigned XW   = $clog2(MAX_W),
  localparam int unsigned HW   = $clog2(MAX_H + 1),
  localparam int unsigned WW   = $clog2(MAX_W + 1),
  localparam int unsigned LA   = $clog2(NL)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [HW-1:0]    img_h,
  input  logic [WW-1:0]    img_w,
  input  layer_cfg_t       cfg,
  output logic [LA-1:0]    layer,
  output logic             busy,
  output logic             done,
  output logic [31:0]      cycles,
  // step issued this cycle
  output logic             step_valid,
  output logic             step_first,
  output logic             step_last,
  output logic [CH_W-1:0]  rd_ch,
  output logic [YW-1:0]    rd_y,
  output logic [XW-1:0]    rd_x,
  output logic [CH_W-1:0]  grp_base,   // first output channel of the group
  output logic [15:0]      w_addr,
  output logic             rd_bank
);

  typedef enum logic [1:0] { S_IDLE, S_RUN, S_DRAIN, S_DONE } state_e;

  state_e          state;
  logic [CH_W-1:0] c, g;
  logic [YW-1:0]   y;
  logic [XW-1:0]   x;
  logic [3:0]      dcnt;
  logic [CH_W-1:0] ngrp;

  assign ngrp       = CH_W'((int'(cfg.cout_cnt) + int'(LANES) - 1) / int'(LANES));
  assign busy       = (state == S_RUN) || (state == S_DRAIN);
  assign step_valid = (state == S_RUN);
  assign step_first = (c == '0);
  assign step_last  = (c == cfg.cin_cnt - 1'b1);
  assign rd_ch      = cfg.cin_base + c;
  assign rd_y       = y;
  assign rd_x       = x;
  assign grp_base   = CH_W'(int'(g) * int'(LANES));
  assign w_addr     = cfg.w_base + 16'(int'(g) * int'(cfg.cin_cnt) + int'(c));
  assign rd_bank    = layer[0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      layer  <= '0;
      c      <= '0;
      g      <= '0;
      y      <= '0;
      x      <= '0;
      dcnt   <= '0;
      cycles <= '0;
      done   <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            state  <= S_RUN;
            layer  <= '0;
            c      <= '0;
            g      <= '0;
            y      <= '0;
            x      <= '0;
            cycles <= '0;
            done   <= 1'b0;
          end
        end
        S_RUN: begin
          cycles <= cycles + 1;
          if (!step_last) begin
            c <= c + 1'b1;
          end else begin
            c <= '0;
            if (g != ngrp - 1'b1) begin
              g <= g + 1'b1;
            end else begin
              g <= '0;
              if (int'(x) != int'(img_w) - 1) begin
                x <= x + 1'b1;
              end else begin
                x <= '0;
                if (int'(y) != int'(img_h) - 1) begin
                  y <= y + 1'b1;
                end else begin
                  y     <= '0;
                  state <= S_DRAIN;
                  dcnt  <= 4'(DRAIN - 1);
                end
              end
            end
          end
        end
        S_DRAIN: begin
          cycles <= cycles + 1;
          if (dcnt != 0) begin
            dcnt <= dcnt - 1'b1;
          end else if (int'(layer) == int'(NL) - 1) begin
            state <= S_DONE;
            done  <= 1'b1;
          end else begin
            layer <= layer + 1'b1;
            state <= S_RUN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

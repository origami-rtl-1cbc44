// sop_unit: sum-of-products unit, the inner product of an image patch and a
// kernel.
//
// TAPS multipliers (49 for a 7 x 7 kernel) and an adder tree compute
// sum(x[t]*w[t]) at full precision. The multiplier is split over two
// pipeline stages (operand register, product register) and the adder tree
// over two more (row sums of SUM_GRP products, then the total), as in the
// fabricated chip, which places two stages in each. The total is then
// truncated to a WORD_W-bit word in the input's fixed-point format: the
// W_FRAC fraction bits of the weights are dropped (arithmetic shift). Words
// that do not fit are saturated, which is this design's choice.
//
// Interface: valid_i, x_i, w_i and the tag tag_i are sampled at every clock;
// y_o, valid_o and tag_o appear 4 cycles later. A new operand set may be
// given every cycle. The unit runs in the fast clock domain.
module sop_unit
  import origami_pkg::*;
#(
  parameter int unsigned TAPS    = HK * WK,
  parameter int unsigned SUM_GRP = WK,
  parameter int unsigned FRAC    = W_FRAC,
  parameter int unsigned TAG_W   = 4
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     valid_i,
  input  logic signed [WORD_W-1:0] x_i [TAPS],
  input  logic signed [WORD_W-1:0] w_i [TAPS],
  input  logic [TAG_W-1:0]         tag_i,
  output logic                     valid_o,
  output logic signed [WORD_W-1:0] y_o,
  output logic [TAG_W-1:0]         tag_o
);

  localparam int unsigned NGRP = (TAPS + SUM_GRP - 1) / SUM_GRP;
  localparam int unsigned PW   = 2 * WORD_W;                 // product width
  localparam int unsigned SW   = PW + $clog2(TAPS + 1);      // full sum width

  logic signed [WORD_W-1:0] xq [TAPS], wq [TAPS];
  logic signed [PW-1:0]     pq [TAPS];
  logic signed [SW-1:0]     gq [NGRP];
  logic signed [SW-1:0]     sq;
  logic [3:0]               vq;
  logic [TAG_W-1:0]         tq [4];

  // stage 1: operands, stage 2: products
  always_ff @(posedge clk_i) begin
    xq <= x_i;
    wq <= w_i;
    for (int t = 0; t < TAPS; t++) pq[t] <= xq[t] * wq[t];
  end

  // stage 3: group sums, stage 4: total
  always_ff @(posedge clk_i) begin
    for (int g = 0; g < NGRP; g++) begin
      logic signed [SW-1:0] acc;
      acc = '0;
      for (int t = g * SUM_GRP; t < (g + 1) * SUM_GRP && t < TAPS; t++) acc += SW'(pq[t]);
      gq[g] <= acc;
    end
    begin
      logic signed [SW-1:0] tot;
      tot = '0;
      for (int g = 0; g < NGRP; g++) tot += gq[g];
      sq <= tot;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni)
    if (!rst_ni) vq <= '0;
    else         vq <= {vq[2:0], valid_i};

  always_ff @(posedge clk_i) begin
    tq[0] <= tag_i;
    for (int i = 1; i < 4; i++) tq[i] <= tq[i-1];
  end

  assign valid_o = vq[3];
  assign tag_o   = tq[3];
  assign y_o     = sat_word(48'(sq >>> FRAC));

endmodule

// image_bank: register window that feeds the sum-of-products units.
//
// It keeps an HK x WK pixel window for each of the NCH input channels, NCH*HK
// rows of WK pixels in all. Every push shifts in one new row (WK pixels of one
// channel, read from the image window memory) and drops the oldest. Rows
// arrive row by row with the channels innermost, so the rows are kept as one
// shift chain of NCH*HK rows in which every NCH-th row belongs to the same
// channel: after a push the window of the channel just pushed sits at the
// chain positions 0, NCH, 2*NCH, ... and needs no multiplexer. The chain
// organisation is this design's own; the size of the bank follows the paper.
//
// Timing: the window of the row pushed at a clock edge is on win_o after that
// edge, together with win_valid_o (push_i and out_ok_i of that push) and its
// channel win_ch_o. The window stays until the next edge. win_o[dy][dx] is
// the pixel of kernel row dy (0 = top) and column dx (0 = left, oldest).
module image_bank
  import origami_pkg::*;
#(
  parameter int unsigned P_NCH = NCH,
  parameter int unsigned P_HK  = HK,
  parameter int unsigned P_WK  = WK,
  localparam int unsigned CW   = (P_NCH > 1) ? $clog2(P_NCH) : 1
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic                          push_i,
  input  logic [P_WK*WORD_W-1:0]        row_i,     // newest pixel in low bits
  input  logic [CW-1:0]                 ch_i,
  input  logic                          out_ok_i,  // window is a complete kernel window
  output logic signed [WORD_W-1:0]      win_o [P_HK][P_WK],
  output logic                          win_valid_o,
  output logic [CW-1:0]                 win_ch_o
);

  localparam int unsigned DEPTH = P_NCH * P_HK;

  logic [P_WK*WORD_W-1:0] chain [DEPTH];

  always_ff @(posedge clk_i) begin
    if (push_i) begin
      chain[0] <= row_i;
      for (int i = 1; i < DEPTH; i++) chain[i] <= chain[i-1];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      win_valid_o <= 1'b0;
      win_ch_o    <= '0;
    end else begin
      win_valid_o <= push_i && out_ok_i;
      if (push_i) win_ch_o <= ch_i;
    end
  end

  // Kernel row dy is chain row (HK-1-dy)*NCH; column dx is pixel slot WK-1-dx.
  always_comb
    for (int dy = 0; dy < P_HK; dy++)
      for (int dx = 0; dx < P_WK; dx++)
        win_o[dy][dx] = chain[(P_HK-1-dy)*P_NCH][(P_WK-1-dx)*WORD_W +: WORD_W];

endmodule

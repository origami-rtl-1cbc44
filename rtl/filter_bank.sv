// filter_bank: register storage of all NCH x NCH kernels of a tile.
//
// In configuration mode the weights are shifted in one per slow clock cycle
// (shift_i, wdata_i); after NCH*NCH*HK*WK shifts the word sent first sits in
// register 0. The load order is this design's choice: word
// ((o*NCH + c)*HK + dy)*WK + dx is the weight of output channel o, input
// channel c, kernel row dy and column dx. In normal operation the bank is
// read only.
//
// The read side is a multiplexer choosing one of 2*NCH weight sets: the input
// channel sel_ch_i and the fast-cycle phase sel_phase_i select, for each of
// the NCH/2 sum-of-products units k, the kernel of output channel 2k+phase
// and input channel sel_ch_i. The output is combinational and is sampled by
// the fast clock domain. Registers and multiplexer follow the paper; the
// pairing of output channels with units is this design's choice.
module filter_bank
  import origami_pkg::*;
#(
  parameter int unsigned P_NCH = NCH,
  parameter int unsigned P_HK  = HK,
  parameter int unsigned P_WK  = WK,
  localparam int unsigned NSOP = P_NCH / 2,
  localparam int unsigned TAPS = P_HK * P_WK,
  localparam int unsigned CW   = (P_NCH > 1) ? $clog2(P_NCH) : 1
) (
  input  logic                     clk_i,
  input  logic                     shift_i,
  input  logic signed [WORD_W-1:0] wdata_i,
  input  logic [CW-1:0]            sel_ch_i,
  input  logic                     sel_phase_i,
  output logic signed [WORD_W-1:0] weights_o [NSOP][TAPS]
);

  localparam int unsigned N = P_NCH * P_NCH * TAPS;

  logic signed [WORD_W-1:0] regs [N];

  always_ff @(posedge clk_i)
    if (shift_i) begin
      regs[N-1] <= wdata_i;
      for (int i = 0; i < N-1; i++) regs[i] <= regs[i+1];
    end

  always_comb
    for (int k = 0; k < NSOP; k++)
      for (int t = 0; t < TAPS; t++)
        weights_o[k][t] = regs[((2*k + int'(sel_phase_i)) * P_NCH + int'(sel_ch_i)) * TAPS + t];

endmodule

// chsum: channel summer behind one sum-of-products unit.
//
// The SoP unit delivers, for each input channel c = 0..NCH-1 of an output
// pixel, two inner products in alternate fast cycles, one for each of the two
// output channels the unit serves (tag phase 0 and 1). The channel summer
// keeps one accumulator per phase at full precision (WORD_W + log2(NCH)
// bits): channel 0 starts a new sum, later channels add to it, and after
// channel NCH-1 the total is saturated to WORD_W bits and placed in the held
// result register res_o[phase]. The held results stay while the next pixel is
// accumulated. done_tog_o toggles when the phase-1 total is stored, that is
// when both totals of a pixel are ready; the slow domain watches it. The
// saturation and the toggle are this design's choices.
//
// Tag layout: tag_i = {phase, channel}. Runs in the fast clock domain.
module chsum
  import origami_pkg::*;
#(
  parameter int unsigned P_NCH = NCH,
  localparam int unsigned CW   = (P_NCH > 1) ? $clog2(P_NCH) : 1,
  localparam int unsigned AW   = WORD_W + CW
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     valid_i,
  input  logic signed [WORD_W-1:0] y_i,
  input  logic [CW:0]              tag_i,
  output logic signed [WORD_W-1:0] res_o [2],
  output logic                     done_tog_o
);

  logic signed [AW-1:0] acc [2];
  logic                 ph;
  logic [CW-1:0]        ch;
  logic signed [AW-1:0] sum;

  assign ph  = tag_i[CW];
  assign ch  = tag_i[CW-1:0];
  assign sum = ((ch == '0) ? AW'(0) : acc[ph]) + AW'(y_i);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      acc[0]     <= '0;
      acc[1]     <= '0;
      res_o[0]   <= '0;
      res_o[1]   <= '0;
      done_tog_o <= 1'b0;
    end else if (valid_i) begin
      acc[ph] <= sum;
      if (ch == CW'(P_NCH - 1)) begin
        res_o[ph] <= sat_word(48'(sum));
        if (ph) done_tog_o <= ~done_tog_o;
      end
    end
  end

endmodule

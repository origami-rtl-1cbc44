// origami_pkg: sizes, types and arithmetic helpers shared by the Origami
// convolution accelerator core.
//
// The accelerator computes a tile of n_ch input channels times n_ch output
// channels of a convolutional layer with a h_k x w_k kernel. The numbers below
// are the ones of the fabricated configuration: 12-bit fixed-point words,
// n_ch = 8, a 7 x 7 kernel, stripes of up to 512 rows, and an image window
// memory split into four banks of 1024 words. The fraction length of the
// weights (W_FRAC) is this design's own choice; everything else follows the
// published configuration.
package origami_pkg;

  parameter int unsigned WORD_W     = 12;   // data, weight and result word width
  parameter int unsigned NCH        = 8;    // input and output channels per tile
  parameter int unsigned HK         = 7;    // kernel height
  parameter int unsigned WK         = 7;    // kernel width
  parameter int unsigned HIN_MAX    = 512;  // maximum stripe height
  parameter int unsigned SRAM_BANKS = 4;    // image window memory banks
  parameter int unsigned W_FRAC     = 8;    // fraction bits of the weights (own choice)

  // Saturate a wide signed value to a WORD_W-bit signed word.
  function automatic logic signed [WORD_W-1:0] sat_word(input logic signed [47:0] v);
    logic signed [47:0] maxv, minv;
    maxv = 48'sd1 <<< (WORD_W - 1);
    maxv = maxv - 48'sd1;
    minv = -(48'sd1 <<< (WORD_W - 1));
    if (v > maxv)      return maxv[WORD_W-1:0];
    else if (v < minv) return minv[WORD_W-1:0];
    else               return v[WORD_W-1:0];
  endfunction

endpackage

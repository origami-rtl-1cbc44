// origami_clkgen: core clock generation of the accelerator.
//
// The computation units run at twice the I/O clock. Because standard pads
// cannot carry the fast clock, two copies of the slow clock, the second one
// shifted by a quarter period, enter the chip and the fast clock is their
// XOR (this follows the fabricated chip). The slow clock clk_i drives the
// slow domain directly.
//
// phase_o tells fast-domain logic which half of the slow cycle it is in: 0 in
// the half after a rising edge of clk_i, 1 in the second half. It compares a
// toggle flop of the slow domain with its copy taken in the fast domain; this
// way of deriving the phase is this design's own choice. Both domains share
// the asynchronous active-low reset rst_ni.
//
// The XOR clock is a deliberate gated clock; it is the chip's clocking scheme.
module origami_clkgen (
  input  logic clk_i,        // slow clock f
  input  logic clk_shift_i,  // slow clock shifted by a quarter period
  input  logic rst_ni,
  output logic clk_fast_o,   // 2f clock
  output logic phase_o       // half of the slow cycle, see above
);

  logic tog_s, tog_f;

  assign clk_fast_o = clk_i ^ clk_shift_i;

  always_ff @(posedge clk_i or negedge rst_ni)
    if (!rst_ni) tog_s <= 1'b0;
    else         tog_s <= ~tog_s;

  always_ff @(posedge clk_fast_o or negedge rst_ni)
    if (!rst_ni) tog_f <= 1'b1;
    else         tog_f <= tog_s;

  assign phase_o = (tog_f == tog_s);

endmodule

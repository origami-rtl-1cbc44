// origami_top: the Origami convolutional network accelerator core.
//
// One pass computes an NCH-input x NCH-output channel tile of a convolutional
// layer with an HK x WK kernel over an image stripe of up to HIN_MAX rows:
//   out[o](y,x) = sum_c sum_dy sum_dx k[o][c][dy][dx] * in[c](y+dy, x+dx)
// ("valid" output positions only; for a true convolution the host stores the
// kernels flipped). Partial tiles, bias, activation and pooling are left to
// the host.
//
// Data flow (slow clock f): input word register -> control -> image window
// memory (WK columns of the stripe) -> image bank (an HK x WK window per
// channel). Fast clock 2f: the filter bank multiplexer and NCH/2 sum-of-
// products units, each computing two output channels per slow cycle, then
// one channel summer per unit accumulating over the NCH input channels.
// Slow clock again: the output mux sends the NCH results of each pixel on the
// output bus.
//
// Protocol. Hold cfg_mode_i high and send, with in_valid_i, the stripe
// height and then the NCH*NCH*HK*WK weights (order in filter_bank). Then drop
// cfg_mode_i and send the stripe: columns left to right, in each column rows
// top to bottom, in each row channels 0..NCH-1, one word per cycle with
// in_valid_i; gaps stall the core. After WK-1 columns and HK-1 rows of each
// column, every row yields one output pixel: NCH words with out_valid_o, in
// output-channel order, a fixed latency after the last input word of that
// row. Output pixels come column by column, rows top to bottom.
//
// bist_start_i runs the memory self-test (sram_bist); it owns the memory
// while running. clk_out_o is the in-phase clock output of the chip.
// Structure, sizes and clocking follow the paper; the bus protocol details
// are this design's own.
module origami_top
  import origami_pkg::*;
#(
  parameter int unsigned P_NCH     = NCH,
  parameter int unsigned P_HK      = HK,
  parameter int unsigned P_WK      = WK,
  parameter int unsigned P_HIN_MAX = HIN_MAX
) (
  input  logic                     clk_i,
  input  logic                     clk_shift_i,
  input  logic                     rst_ni,
  input  logic                     cfg_mode_i,
  input  logic                     in_valid_i,
  input  logic signed [WORD_W-1:0] in_data_i,
  output logic                     out_valid_o,
  output logic signed [WORD_W-1:0] out_data_o,
  output logic                     clk_out_o,
  input  logic                     bist_start_i,
  output logic                     bist_done_o,
  output logic                     bist_fail_o
);

  localparam int unsigned NSOP  = P_NCH / 2;
  localparam int unsigned TAPS  = P_HK * P_WK;
  localparam int unsigned CW    = (P_NCH > 1) ? $clog2(P_NCH) : 1;
  localparam int unsigned AW    = $clog2(P_NCH * P_HIN_MAX);
  localparam int unsigned DW    = P_WK * WORD_W;
  localparam int unsigned RW    = $clog2(P_HIN_MAX);

  // clocks
  logic clk_fast, phase;
  origami_clkgen u_clkgen (
    .clk_i(clk_i), .clk_shift_i(clk_shift_i), .rst_ni(rst_ni),
    .clk_fast_o(clk_fast), .phase_o(phase)
  );
  assign clk_out_o = clk_i;

  // control
  logic                     fb_shift;
  logic signed [WORD_W-1:0] fb_data;
  logic                     c_re, c_we, b_re, b_we, bist_active;
  logic [AW-1:0]            c_raddr, c_waddr, b_raddr, b_waddr;
  logic [DW-1:0]            c_wdata, b_wdata, rdata;
  logic                     ib_push, ib_ok;
  logic [DW-1:0]            ib_row;
  logic [CW-1:0]            ib_ch;
  logic [RW:0]              h_in;
  logic                     stall;

  origami_ctrl #(.P_NCH(P_NCH), .P_HK(P_HK), .P_WK(P_WK), .P_HIN_MAX(P_HIN_MAX)) u_ctrl (
    .clk_i(clk_i), .rst_ni(rst_ni),
    .cfg_mode_i(cfg_mode_i), .in_valid_i(in_valid_i), .in_data_i(in_data_i),
    .fb_shift_o(fb_shift), .fb_data_o(fb_data),
    .sram_re_o(c_re), .sram_raddr_o(c_raddr), .sram_rdata_i(rdata),
    .sram_we_o(c_we), .sram_waddr_o(c_waddr), .sram_wdata_o(c_wdata),
    .ib_push_o(ib_push), .ib_row_o(ib_row), .ib_ch_o(ib_ch), .ib_ok_o(ib_ok),
    .h_in_o(h_in), .stall_o(stall)
  );

  // image window memory, shared with the self-test
  sram_bist #(.DEPTH(P_NCH * P_HIN_MAX), .DATA_W(DW)) u_bist (
    .clk_i(clk_i), .rst_ni(rst_ni), .start_i(bist_start_i),
    .active_o(bist_active), .done_o(bist_done_o), .fail_o(bist_fail_o),
    .re_o(b_re), .raddr_o(b_raddr), .rdata_i(rdata),
    .we_o(b_we), .waddr_o(b_waddr), .wdata_o(b_wdata)
  );

  image_window_sram #(.P_NCH(P_NCH), .P_WK(P_WK), .P_HIN_MAX(P_HIN_MAX)) u_sram (
    .clk_i   (clk_i),
    .re_i    (bist_active ? b_re    : c_re),
    .raddr_i (bist_active ? b_raddr : c_raddr),
    .rdata_o (rdata),
    .we_i    (bist_active ? b_we    : c_we),
    .waddr_i (bist_active ? b_waddr : c_waddr),
    .wdata_i (bist_active ? b_wdata : c_wdata)
  );

  // image bank
  logic signed [WORD_W-1:0] win [P_HK][P_WK];
  logic signed [WORD_W-1:0] win_flat [TAPS];
  logic                     win_valid;
  logic [CW-1:0]            win_ch;

  image_bank #(.P_NCH(P_NCH), .P_HK(P_HK), .P_WK(P_WK)) u_ibank (
    .clk_i(clk_i), .rst_ni(rst_ni),
    .push_i(ib_push && !bist_active), .row_i(ib_row), .ch_i(ib_ch), .out_ok_i(ib_ok),
    .win_o(win), .win_valid_o(win_valid), .win_ch_o(win_ch)
  );

  always_comb
    for (int dy = 0; dy < P_HK; dy++)
      for (int dx = 0; dx < P_WK; dx++)
        win_flat[dy*P_WK + dx] = win[dy][dx];

  // filter bank
  logic signed [WORD_W-1:0] weights [NSOP][TAPS];
  filter_bank #(.P_NCH(P_NCH), .P_HK(P_HK), .P_WK(P_WK)) u_fbank (
    .clk_i(clk_i), .shift_i(fb_shift), .wdata_i(fb_data),
    .sel_ch_i(win_ch), .sel_phase_i(phase), .weights_o(weights)
  );

  // fast domain: SoP units and channel summers
  logic signed [WORD_W-1:0] res [P_NCH];
  logic [NSOP-1:0]          done_tog;

  for (genvar k = 0; k < NSOP; k++) begin : g_sop
    logic                     sv;
    logic signed [WORD_W-1:0] sy;
    logic [CW:0]              stag;
    logic signed [WORD_W-1:0] cres [2];

    sop_unit #(.TAPS(TAPS), .SUM_GRP(P_WK), .TAG_W(CW+1)) u_sop (
      .clk_i(clk_fast), .rst_ni(rst_ni),
      .valid_i(win_valid), .x_i(win_flat), .w_i(weights[k]), .tag_i({phase, win_ch}),
      .valid_o(sv), .y_o(sy), .tag_o(stag)
    );

    chsum #(.P_NCH(P_NCH)) u_chsum (
      .clk_i(clk_fast), .rst_ni(rst_ni),
      .valid_i(sv), .y_i(sy), .tag_i(stag),
      .res_o(cres), .done_tog_o(done_tog[k])
    );

    assign res[2*k]   = cres[0];
    assign res[2*k+1] = cres[1];
  end

  // output bus
  output_mux #(.P_NCH(P_NCH)) u_omux (
    .clk_i(clk_i), .rst_ni(rst_ni),
    .res_i(res), .done_tog_i(done_tog[0]),
    .out_valid_o(out_valid_o), .out_data_o(out_data_o)
  );

endmodule

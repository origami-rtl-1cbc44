// origami_ctrl: input stage and control of the slow clock domain.
//
// The 12-bit input bus with its valid bit and the cfg_mode pin are registered
// once. Words then go one of two ways.
//
// Configuration (cfg_mode high): the first valid word of a burst is the
// stripe height h_in (clamped to 1..HIN_MAX); every following valid word is a
// filter weight, shifted into the filter bank. A burst also restarts the
// stripe. Putting h_in in the first word is this design's choice.
//
// Processing (cfg_mode low): the stripe arrives column by column, each column
// row by row and each row channel by channel. For the word of (row r, channel
// c) the memory word at address r*NCH + c (the last WK pixels of that row and
// channel) is read; one cycle later the new pixel is shifted into it, the
// result is written back and the same WK-pixel row is pushed into the image
// bank. The push is marked as a complete kernel window once WK-1 columns
// and HK-1 rows of the current column have been received; before that the
// processing units idle, as in the paper (border effects). When no valid word
// arrives nothing advances: the whole pipeline stalls with the input.
//
// Timing: one word per slow cycle; memory read in the cycle after the input
// register, write-back and image-bank push in the next. The upper WK-1 pixels
// of the written-back word and of the pushed row are the memory's read data
// passed on unchanged (the window shift is only wiring), and the oldest pixel
// of the read word is dropped.
module origami_ctrl
  import origami_pkg::*;
#(
  parameter int unsigned P_NCH     = NCH,
  parameter int unsigned P_HK      = HK,
  parameter int unsigned P_WK      = WK,
  parameter int unsigned P_HIN_MAX = HIN_MAX,
  localparam int unsigned CW       = (P_NCH > 1) ? $clog2(P_NCH) : 1,
  localparam int unsigned RW       = $clog2(P_HIN_MAX),
  localparam int unsigned AW       = $clog2(P_NCH * P_HIN_MAX),
  localparam int unsigned DW       = P_WK * WORD_W
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // pins
  input  logic                     cfg_mode_i,
  input  logic                     in_valid_i,
  input  logic signed [WORD_W-1:0] in_data_i,
  // filter bank
  output logic                     fb_shift_o,
  output logic signed [WORD_W-1:0] fb_data_o,
  // image window memory
  output logic                     sram_re_o,
  output logic [AW-1:0]            sram_raddr_o,
  input  logic [DW-1:0]            sram_rdata_i,
  output logic                     sram_we_o,
  output logic [AW-1:0]            sram_waddr_o,
  output logic [DW-1:0]            sram_wdata_o,
  // image bank
  output logic                     ib_push_o,
  output logic [DW-1:0]            ib_row_o,
  output logic [CW-1:0]            ib_ch_o,
  output logic                     ib_ok_o,
  // status
  output logic [RW:0]              h_in_o,
  output logic                     stall_o    // processing mode, no input word
);

  // input register stage
  logic                     cfg_q, vld_q;
  logic signed [WORD_W-1:0] dat_q;
  always_ff @(posedge clk_i or negedge rst_ni)
    if (!rst_ni) begin
      cfg_q <= 1'b0;
      vld_q <= 1'b0;
      dat_q <= '0;
    end else begin
      cfg_q <= cfg_mode_i;
      vld_q <= in_valid_i;
      dat_q <= in_data_i;
    end

  // configuration
  logic        first_q;
  logic [RW:0] h_in_q;
  logic        run;

  assign fb_shift_o = cfg_q && vld_q && !first_q;
  assign fb_data_o  = dat_q;
  assign run        = !cfg_q && vld_q;
  assign stall_o    = !cfg_q && !vld_q;
  assign h_in_o     = h_in_q;

  // position counters
  logic [CW-1:0] ch_q;
  logic [RW-1:0] row_q;
  logic [$clog2(P_WK):0] col_q;    // saturates at WK-1
  logic          last_ch, last_row;

  assign last_ch  = (ch_q == CW'(P_NCH - 1));
  assign last_row = ({1'b0, row_q} == h_in_q - 1'b1);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      first_q <= 1'b1;
      h_in_q  <= (RW+1)'(P_HIN_MAX);
      ch_q    <= '0;
      row_q   <= '0;
      col_q   <= '0;
    end else if (cfg_q) begin
      ch_q  <= '0;
      row_q <= '0;
      col_q <= '0;
      if (vld_q && first_q) begin
        first_q <= 1'b0;
        if (dat_q <= 0)                              h_in_q <= (RW+1)'(1);
        else if (int'(dat_q) > int'(P_HIN_MAX))      h_in_q <= (RW+1)'(P_HIN_MAX);
        else                                         h_in_q <= (RW+1)'(dat_q);
      end
    end else begin
      first_q <= 1'b1;
      if (run) begin
        ch_q <= last_ch ? '0 : ch_q + 1'b1;
        if (last_ch) begin
          row_q <= last_row ? '0 : row_q + 1'b1;
          if (last_row && col_q != ($clog2(P_WK)+1)'(P_WK - 1)) col_q <= col_q + 1'b1;
        end
      end
    end
  end

  // memory read
  assign sram_re_o    = run;
  assign sram_raddr_o = AW'(row_q) * AW'(P_NCH) + AW'(ch_q);

  // write-back and image bank push, one cycle later
  logic                     s1_v, s1_ok;
  logic signed [WORD_W-1:0] s1_pix;
  logic [AW-1:0]            s1_addr;
  logic [CW-1:0]            s1_ch;

  always_ff @(posedge clk_i or negedge rst_ni)
    if (!rst_ni) s1_v <= 1'b0;
    else         s1_v <= run;

  always_ff @(posedge clk_i) begin
    s1_pix  <= dat_q;
    s1_addr <= sram_raddr_o;
    s1_ch   <= ch_q;
    s1_ok   <= (col_q == ($clog2(P_WK)+1)'(P_WK - 1)) && (int'(row_q) >= int'(P_HK) - 1);
  end

  logic [DW-1:0] merged;
  if (P_WK > 1) begin : g_shift
    assign merged = {sram_rdata_i[(P_WK-1)*WORD_W-1:0], s1_pix};
  end else begin : g_noshift
    assign merged = s1_pix;
  end

  assign sram_we_o    = s1_v;
  assign sram_waddr_o = s1_addr;
  assign sram_wdata_o = merged;
  assign ib_push_o    = s1_v;
  assign ib_row_o     = merged;
  assign ib_ch_o      = s1_ch;
  assign ib_ok_o      = s1_ok;

endmodule

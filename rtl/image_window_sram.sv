// image_window_sram: memory holding a w_k-column window of the input stripe.
//
// For every row of the stripe (up to HIN_MAX) and every input channel it holds
// one word of WK pixels: the last WK columns received at that row and channel,
// newest pixel in the lowest WORD_W bits. The address of (row, channel) is
// row*NCH + channel. The NCH*HIN_MAX words are split into BANKS equal banks
// by the upper address bits, as in the fabricated chip (4 x 1024 words of
// 7 x 12 bit). Each bank has one read and one write port (own choice), so the
// row read for the image bank and the write-back of the updated word can
// proceed in the same cycle. Read latency is one cycle.
module image_window_sram
  import origami_pkg::*;
#(
  parameter int unsigned P_NCH     = NCH,
  parameter int unsigned P_WK      = WK,
  parameter int unsigned P_HIN_MAX = HIN_MAX,
  parameter int unsigned P_BANKS   = SRAM_BANKS,
  localparam int unsigned DEPTH    = P_NCH * P_HIN_MAX,
  localparam int unsigned AW       = $clog2(DEPTH),
  localparam int unsigned DW       = P_WK * WORD_W
) (
  input  logic          clk_i,
  input  logic          re_i,
  input  logic [AW-1:0] raddr_i,
  output logic [DW-1:0] rdata_o,
  input  logic          we_i,
  input  logic [AW-1:0] waddr_i,
  input  logic [DW-1:0] wdata_i
);

  localparam int unsigned BW  = DEPTH / P_BANKS;   // words per bank
  localparam int unsigned BAW = $clog2(BW);
  localparam int unsigned SW  = (P_BANKS > 1) ? $clog2(P_BANKS) : 1;

  logic [DW-1:0] bank_rdata [P_BANKS];
  logic [SW-1:0] rsel_q;

  for (genvar b = 0; b < P_BANKS; b++) begin : g_bank
    logic bre, bwe;
    assign bre = re_i && (int'(raddr_i) / BW == b);
    assign bwe = we_i && (int'(waddr_i) / BW == b);
    sram_bank #(.WORDS(BW), .DATA_W(DW)) u_bank (
      .clk_i   (clk_i),
      .re_i    (bre),
      .raddr_i (BAW'(int'(raddr_i) % BW)),
      .rdata_o (bank_rdata[b]),
      .we_i    (bwe),
      .waddr_i (BAW'(int'(waddr_i) % BW)),
      .wdata_i (wdata_i)
    );
  end

  always_ff @(posedge clk_i)
    if (re_i) rsel_q <= SW'(int'(raddr_i) / BW);

  assign rdata_o = bank_rdata[rsel_q];

endmodule

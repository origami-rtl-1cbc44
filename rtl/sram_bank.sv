// sram_bank: one bank of the image window memory.
//
// A synchronous memory with one read port and one write port on the same
// clock. A read issued with re_i returns its word on rdata_o one cycle later;
// a write with we_i takes effect at the clock edge. Reading and writing the
// same address in one cycle returns the old word. It stands for an SRAM macro
// of the target process; the two-port organisation is this design's choice.
module sram_bank #(
  parameter int unsigned WORDS  = 1024,
  parameter int unsigned DATA_W = 84
) (
  input  logic                     clk_i,
  input  logic                     re_i,
  input  logic [$clog2(WORDS)-1:0] raddr_i,
  output logic [DATA_W-1:0]        rdata_o,
  input  logic                     we_i,
  input  logic [$clog2(WORDS)-1:0] waddr_i,
  input  logic [DATA_W-1:0]        wdata_i
);

  logic [DATA_W-1:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (re_i) rdata_o <= mem[raddr_i];
    if (we_i) mem[waddr_i] <= wdata_i;
  end

endmodule

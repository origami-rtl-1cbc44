// tb_origami_ctrl: drives a configuration burst and a stripe through the
// control block of a reduced core (2 channels, 3 x 3 kernel, 16 rows) with a
// memory model attached. Checks: the stripe height is taken from the first
// configuration word, every further word shifts the filter bank, and for each
// processed input word the row pushed to the image bank holds the last WK
// pixels of that row and channel (newest in the low bits), with the border
// flag set only once WK-1 columns and HK-1 rows have been received. Random
// input gaps check that the pipeline stalls and reports the stall.
module tb_origami_ctrl;
  import origami_pkg::*;
  localparam int NCH_T = 2, HK_T = 3, WK_T = 3, HM = 16, H = 6, W = 6, NWT = 20;
  localparam int AW = $clog2(NCH_T*HM), DW = WK_T*WORD_W;
  logic clk = 0, rst_n = 0;
  logic cfg = 0, vin = 0;
  logic signed [WORD_W-1:0] din = '0;
  logic fbs, re, we, push, ok, stall;
  logic signed [WORD_W-1:0] fbd;
  logic [AW-1:0] ra, wa;
  logic [DW-1:0] rd, wd, row;
  logic ch;
  logic [$clog2(HM):0] h_in;
  logic [DW-1:0] mem [NCH_T*HM];
  logic signed [WORD_W-1:0] img [NCH_T][H][W];
  logic signed [WORD_W-1:0] wq [$];
  typedef struct { logic [DW-1:0] row; logic ch; logic ok; } push_t;
  push_t pq [$];
  int checks = 0, failures = 0, nstall = 0;

  always #5 clk = ~clk;

  origami_ctrl #(.P_NCH(NCH_T), .P_HK(HK_T), .P_WK(WK_T), .P_HIN_MAX(HM)) dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_mode_i(cfg), .in_valid_i(vin), .in_data_i(din),
    .fb_shift_o(fbs), .fb_data_o(fbd),
    .sram_re_o(re), .sram_raddr_o(ra), .sram_rdata_i(rd),
    .sram_we_o(we), .sram_waddr_o(wa), .sram_wdata_o(wd),
    .ib_push_o(push), .ib_row_o(row), .ib_ch_o(ch), .ib_ok_o(ok),
    .h_in_o(h_in), .stall_o(stall));

  always @(posedge clk) begin
    if (re) rd <= mem[ra];
    if (we) mem[wa] <= wd;
  end

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // monitors (values of the cycle that just ended)
  always @(negedge clk) if (rst_n) begin
    if (fbs) begin
      checks++;
      if (wq.size() == 0 || fbd !== wq.pop_front()) begin failures++; $display("filter word wrong"); end
    end
    if (push) begin
      push_t e;
      checks++;
      if (pq.size() == 0) begin failures++; $display("unexpected push"); end
      else begin
        e = pq.pop_front();
        if (row !== e.row || ch !== e.ch || ok !== e.ok) begin
          failures++; if (failures < 6) $display("push mismatch: row %h/%h ch %0d/%0d ok %0d/%0d", row, e.row, ch, e.ch, ok, e.ok);
        end
      end
    end
    if (stall) nstall++;
  end

  task automatic send(logic signed [WORD_W-1:0] v, bit gaps);
    while (gaps && ($urandom % 3) == 0) begin vin = 0; @(negedge clk); end
    vin = 1; din = v; @(negedge clk); vin = 0;
  endtask

  initial begin
    foreach (mem[i]) mem[i] = '0;
    rd = '0;
    @(negedge clk); rst_n = 1;
    // configuration: height, then NWT weights
    cfg = 1;
    send(WORD_W'(H), 0);
    for (int i = 0; i < NWT; i++) begin
      logic signed [WORD_W-1:0] v;
      v = WORD_W'($urandom); wq.push_back(v); send(v, 1);
    end
    cfg = 0;
    repeat (3) @(negedge clk);
    checks++; if (h_in !== ($clog2(HM)+1)'(H)) begin failures++; $display("h_in %0d", h_in); end
    checks++; if (wq.size() != 0) begin failures++; $display("%0d filter words not shifted", wq.size()); end
    // stripe
    for (int x = 0; x < W; x++)
      for (int y = 0; y < H; y++)
        for (int c = 0; c < NCH_T; c++) begin
          push_t e;
          img[c][y][x] = WORD_W'($urandom);
          e.row = '0;
          for (int k = 0; k < WK_T; k++)
            if (x - k >= 0) e.row[k*WORD_W +: WORD_W] = img[c][y][x-k];
          e.ch = c[0]; e.ok = (x >= WK_T-1) && (y >= HK_T-1);
          pq.push_back(e);
          send(img[c][y][x], 1);
        end
    repeat (4) @(negedge clk);
    checks++; if (pq.size() != 0) begin failures++; $display("%0d pushes missing", pq.size()); end
    checks++; if (nstall == 0) begin failures++; $display("no stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

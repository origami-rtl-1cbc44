// tb_image_bank: pushes rows of random pixels in the stripe order (rows,
// channels innermost) and checks after each push that the window output holds
// the last HK rows of the pushed channel, oldest on top, oldest pixel on the
// left, and that valid and channel follow the push by one cycle.
module tb_image_bank;
  import origami_pkg::*;
  localparam int NCH_T = 4, HK_T = 3, WK_T = 3, ROWS = 12;
  logic clk = 0, rst_n = 0;
  logic push = 0, ok = 0;
  logic [WK_T*WORD_W-1:0] row = '0;
  logic [1:0] ch = '0;
  logic signed [WORD_W-1:0] win [HK_T][WK_T];
  logic wv;
  logic [1:0] wch;
  logic [WK_T*WORD_W-1:0] hist [ROWS][NCH_T];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  image_bank #(.P_NCH(NCH_T), .P_HK(HK_T), .P_WK(WK_T)) dut (
    .clk_i(clk), .rst_ni(rst_n), .push_i(push), .row_i(row), .ch_i(ch), .out_ok_i(ok),
    .win_o(win), .win_valid_o(wv), .win_ch_o(wch));

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(negedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < NCH_T; c++) begin
        push = 1; ch = c; ok = (r >= HK_T-1);
        row = {$urandom, $urandom}; hist[r][c] = row;
        @(negedge clk);
        push = 0;
        checks++; if (wv !== (r >= HK_T-1) || wch !== 2'(c)) begin failures++; $display("valid/channel wrong at r=%0d c=%0d", r, c); end
        if (r >= HK_T-1)
          for (int dy = 0; dy < HK_T; dy++)
            for (int dx = 0; dx < WK_T; dx++) begin
              logic signed [WORD_W-1:0] e;
              e = hist[r-HK_T+1+dy][c][(WK_T-1-dx)*WORD_W +: WORD_W];
              checks++;
              if (win[dy][dx] !== e) begin failures++; if (failures < 5) $display("r=%0d c=%0d dy=%0d dx=%0d", r, c, dy, dx); end
            end
        // a cycle without push: window valid must drop
        @(negedge clk);
        checks++; if (wv !== 1'b0) begin failures++; $display("valid without push"); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

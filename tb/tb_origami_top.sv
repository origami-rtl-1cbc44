// tb_origami_top: end-to-end test of the accelerator core at its default
// size (8 x 8 channels, 7 x 7 kernel, 512-row memory).
//
// The test runs the memory self-test, then two stripes, each preceded by a
// configuration burst (stripe height and all 3136 weights):
//   stripe A: 10 rows x 9 columns, small values, random input gaps (stalls);
//   stripe B: 12 rows x 8 columns, full-range values that saturate, no gaps.
// A reference model in the testbench computes every output word with the
// same fixed-point rules (inner product, drop W_FRAC bits, saturate; sum
// over channels, saturate), and the output stream is compared word by word.
// It also checks the word count, that stripe B's outputs of each column
// come back to back (one word per slow cycle, the peak rate), and counts how
// often each mechanism occurred: stall, border preload, saturation,
// configuration switch, self-test.
`timescale 1ns/1ps
module tb_origami_top;
  import origami_pkg::*;

  localparam int MAXH = 16, MAXW = 16;
  localparam int NW = NCH*NCH*HK*WK;

  logic clk = 0, clk_sh = 0, rst_n = 0;
  logic cfg = 0, vin = 0;
  logic signed [WORD_W-1:0] din = '0;
  logic vout, clk_out, bdone, bfail, bstart = 0;
  logic signed [WORD_W-1:0] dout;

  always #2 clk = ~clk;
  initial begin #1; forever #2 clk_sh = ~clk_sh; end

  origami_top dut (
    .clk_i(clk), .clk_shift_i(clk_sh), .rst_ni(rst_n), .cfg_mode_i(cfg),
    .in_valid_i(vin), .in_data_i(din), .out_valid_o(vout), .out_data_o(dout),
    .clk_out_o(clk_out), .bist_start_i(bstart), .bist_done_o(bdone), .bist_fail_o(bfail)
  );

  int checks = 0, failures = 0;
  int n_stall = 0, n_border = 0, n_sat = 0, n_cfg = 0, n_bist = 0;

  logic signed [WORD_W-1:0] wt [NW];
  logic signed [WORD_W-1:0] img [NCH][MAXH][MAXW];
  logic signed [WORD_W-1:0] expq [$];
  int run_len = 0, max_run = 0;
  bit  track_run = 0;

  function automatic int widx(int o, int c, int dy, int dx);
    return ((o*NCH + c)*HK + dy)*WK + dx;
  endfunction

  function automatic logic signed [WORD_W-1:0] sat(longint v, ref int nsat);
    longint mx = (1 <<< (WORD_W-1)) - 1, mn = -(1 <<< (WORD_W-1));
    if (v > mx) begin nsat++; return mx[WORD_W-1:0]; end
    if (v < mn) begin nsat++; return mn[WORD_W-1:0]; end
    return v[WORD_W-1:0];
  endfunction

  task automatic make_expected(int h, int w);
    for (int ox = 0; ox <= w - WK; ox++)
      for (int oy = 0; oy <= h - HK; oy++)
        for (int o = 0; o < NCH; o++) begin
          longint acc = 0;
          for (int c = 0; c < NCH; c++) begin
            longint s = 0;
            for (int dy = 0; dy < HK; dy++)
              for (int dx = 0; dx < WK; dx++)
                s += longint'(img[c][oy+dy][ox+dx]) * longint'(wt[widx(o,c,dy,dx)]);
            acc += longint'(sat(s >>> W_FRAC, n_sat));
          end
          expq.push_back(sat(acc, n_sat));
        end
  endtask

  task automatic send(logic signed [WORD_W-1:0] v, int gap_pct);
    while (gap_pct > 0 && ($urandom % 100) < gap_pct) begin
      vin = 0; n_stall++;
      @(negedge clk);
    end
    vin = 1; din = v;
    @(negedge clk);
    vin = 0;
  endtask

  task automatic stripe(int h, int w, int wrange, int prange, int gap_pct);
    // configuration burst
    for (int i = 0; i < NW; i++) wt[i] = WORD_W'($signed($urandom % (2*wrange)) - wrange);
    for (int c = 0; c < NCH; c++)
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++) img[c][y][x] = WORD_W'($signed($urandom % (2*prange)) - prange);
    make_expected(h, w);
    cfg = 1; n_cfg++;
    send(WORD_W'(h), 0);
    for (int i = 0; i < NW; i++) send(wt[i], 0);
    cfg = 0;
    @(negedge clk);
    // image stripe
    for (int x = 0; x < w; x++)
      for (int y = 0; y < h; y++) begin
        if (x < WK-1 || y < HK-1) n_border++;
        for (int c = 0; c < NCH; c++) send(img[c][y][x], gap_pct);
      end
  endtask

  // output monitor
  always @(negedge clk) begin
    if (rst_n && vout) begin
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("unexpected output %0d", dout);
      end else begin
        logic signed [WORD_W-1:0] e;
        e = expq.pop_front();
        if (dout !== e) begin
          failures++;
          if (failures < 10) $display("mismatch: got %0d expected %0d (%0d left)", dout, e, expq.size());
        end
      end
    end
    if (track_run) begin
      if (vout) run_len++;
      else run_len = 0;
      if (run_len > max_run) max_run = run_len;
    end
  end

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // memory self-test
    @(negedge clk); bstart = 1; @(negedge clk); bstart = 0;
    wait (bdone); n_bist++;
    checks++; if (bfail) begin failures++; $display("BIST reported a failure"); end
    @(negedge clk);
    // stripe A: stalls, no saturation expected
    stripe(10, 9, 64, 256, 30);
    repeat (100) @(negedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("stripe A: %0d words missing", expq.size()); end
    // stripe B: full range, peak rate
    begin
      int nsat0 = n_sat;
      track_run = 1;
      stripe(12, 8, 2048, 2048, 0);
      repeat (100) @(negedge clk);
      checks++; if (expq.size() != 0) begin failures++; $display("stripe B: %0d words missing", expq.size()); end
      checks++; if (max_run != (12-HK+1)*NCH) begin failures++; $display("peak rate: run %0d words, expected %0d", max_run, (12-HK+1)*NCH); end
      if (n_sat == nsat0) $display("note: stripe B did not saturate");
    end
    $display("mechanisms: stall=%0d border=%0d saturation=%0d config=%0d bist=%0d", n_stall, n_border, n_sat, n_cfg, n_bist);
    if (n_stall == 0)  begin failures++; $display("no stall happened"); end
    if (n_border == 0) begin failures++; $display("no border preload happened"); end
    if (n_sat == 0)    begin failures++; $display("no saturation happened"); end
    if (n_cfg < 2)     begin failures++; $display("no configuration switch happened"); end
    if (n_bist == 0)   begin failures++; $display("no self-test happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

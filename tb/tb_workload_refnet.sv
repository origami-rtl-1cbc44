// tb_workload_refnet: one 8-input x 8-output channel tile of each of the three
// convolution stages of the reference scene-labelling network, at the real
// input sizes (stage 1: 240 x 320 with 3 of the 8 input channels used, the
// rest zero; stage 2: 117 x 157; stage 3: 55 x 75), on the core at its
// default size.
//
// Every output word is compared with a reference model in this testbench.
// The run time of each tile in slow cycles is measured and checked against
// the cycle budget of the architecture: one input word per cycle, so a tile
// takes 1 + NCH*NCH*HK*WK configuration cycles plus h*w*NCH stripe cycles,
// plus a fixed pipeline latency. From the counts the border efficiency
// (useful output words per stripe cycle) and the filter-load efficiency are
// printed and compared with the values of the reference analysis
// (border 0.96 / 0.91 / 0.82, filter load 0.99 / 0.98 / 0.91).
`timescale 1ns/1ps
module tb_workload_refnet;
  import origami_pkg::*;

  localparam int MAXH = 240, MAXW = 320;
  localparam int NW = NCH*NCH*HK*WK;

  logic clk = 0, clk_sh = 0, rst_n = 0;
  logic cfg = 0, vin = 0;
  logic signed [WORD_W-1:0] din = '0;
  logic vout, clk_out, bdone, bfail;
  logic signed [WORD_W-1:0] dout;

  always #2 clk = ~clk;
  initial begin #1; forever #2 clk_sh = ~clk_sh; end

  origami_top dut (
    .clk_i(clk), .clk_shift_i(clk_sh), .rst_ni(rst_n), .cfg_mode_i(cfg),
    .in_valid_i(vin), .in_data_i(din), .out_valid_o(vout), .out_data_o(dout),
    .clk_out_o(clk_out), .bist_start_i(1'b0), .bist_done_o(bdone), .bist_fail_o(bfail)
  );

  int checks = 0, failures = 0;
  longint cyc = 0, last_out = 0, n_out = 0;
  logic signed [WORD_W-1:0] wt [NW];
  logic signed [WORD_W-1:0] img [NCH][MAXH][MAXW];
  logic signed [WORD_W-1:0] expq [$];

  always @(posedge clk) cyc++;

  function automatic logic signed [WORD_W-1:0] sat(longint v);
    if (v > 2047) return 2047;
    if (v < -2048) return -2048;
    return v[WORD_W-1:0];
  endfunction

  always @(negedge clk) if (rst_n && vout) begin
    logic signed [WORD_W-1:0] e;
    checks++; n_out++; last_out = cyc;
    if (expq.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = expq.pop_front();
      if (dout !== e) begin failures++; if (failures < 10) $display("mismatch got %0d expected %0d", dout, e); end
    end
  end

  initial begin
    #2000000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic tile(string name, int h, int w, int nin, real ref_border, real ref_fl);
    longint t0, t_stripe, n0;
    real border, fl;
    for (int i = 0; i < NW; i++) wt[i] = WORD_W'($signed($urandom % 128) - 64);
    for (int c = 0; c < NCH; c++)
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++)
          img[c][y][x] = (c < nin) ? WORD_W'($signed($urandom % 512) - 256) : '0;
    for (int ox = 0; ox <= w - WK; ox++)
      for (int oy = 0; oy <= h - HK; oy++)
        for (int o = 0; o < NCH; o++) begin
          longint acc = 0;
          for (int c = 0; c < nin; c++) begin
            longint s = 0;
            for (int dy = 0; dy < HK; dy++)
              for (int dx = 0; dx < WK; dx++)
                s += longint'(img[c][oy+dy][ox+dx]) * longint'(wt[((o*NCH + c)*HK + dy)*WK + dx]);
            acc += longint'(sat(s >>> W_FRAC));
          end
          expq.push_back(sat(acc));
        end
    n0 = n_out;
    t0 = cyc;
    cfg = 1;
    vin = 1; din = WORD_W'(h); @(negedge clk);
    for (int i = 0; i < NW; i++) begin din = wt[i]; @(negedge clk); end
    cfg = 0;
    t_stripe = cyc;
    for (int x = 0; x < w; x++)
      for (int y = 0; y < h; y++)
        for (int c = 0; c < NCH; c++) begin din = img[c][y][x]; @(negedge clk); end
    vin = 0;
    repeat (40) @(negedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("%s: %0d words missing", name, expq.size()); end
    // budget: configuration + stripe, and the last output a fixed latency later
    border = real'(n_out - n0) / real'(cyc - 40 - t_stripe);
    fl     = real'(NCH*h*w) / real'(NW + NCH*h*w);
    $display("%s: %0dx%0d, %0d output words, stripe %0d cycles, last output %0d cycles after stripe end",
             name, h, w, n_out - n0, cyc - 40 - t_stripe, last_out - (cyc - 40));
    $display("%s: border efficiency %0.3f (reference %0.2f), filter-load efficiency %0.3f (reference %0.2f)",
             name, border, ref_border, fl, ref_fl);
    checks++; if (t_stripe - t0 != NW + 1) begin failures++; $display("configuration took %0d cycles", t_stripe - t0); end
    checks++; if (last_out - (cyc - 40) > 20) begin failures++; $display("output latency too long"); end
    checks++; if (border < ref_border - 0.006 || border > ref_border + 0.006) begin failures++; $display("border efficiency off"); end
    checks++; if (fl < ref_fl - 0.006 || fl > ref_fl + 0.006) begin failures++; $display("filter-load efficiency off"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    tile("stage3", 55, 75, 8, 0.82, 0.91);
    tile("stage2", 117, 157, 8, 0.91, 0.98);
    tile("stage1", 240, 320, 3, 0.96, 0.99);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

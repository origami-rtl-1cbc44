// tb_chsum: sends, for a sequence of output pixels, NCH channels x 2 phases
// of SoP results (phases alternating, random gaps between pixels) and checks
// the two held totals and the completion toggle against sums computed here,
// saturated to 12 bits. Also checks that the held totals stay unchanged
// while the next pixel is being accumulated.
module tb_chsum;
  import origami_pkg::*;
  logic clk = 0, rst_n = 0;
  logic vi = 0;
  logic signed [WORD_W-1:0] yi = '0;
  logic [3:0] ti = '0;
  logic signed [WORD_W-1:0] res [2];
  logic tog, tog_prev;
  int checks = 0, failures = 0, nsat = 0;

  always #5 clk = ~clk;

  chsum #(.P_NCH(8)) dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(vi), .y_i(yi), .tag_i(ti),
                         .res_o(res), .done_tog_o(tog));

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic signed [WORD_W-1:0] sat(longint v);
    if (v > 2047) begin nsat++; return 2047; end
    if (v < -2048) begin nsat++; return -2048; end
    return v[WORD_W-1:0];
  endfunction

  initial begin
    logic signed [WORD_W-1:0] e [2];
    logic signed [WORD_W-1:0] held [2];
    @(negedge clk); rst_n = 1;
    tog_prev = tog;
    for (int px = 0; px < 40; px++) begin
      longint s [2];
      int rng;
      rng = (px % 2) ? 2048 : 200;
      s[0] = 0; s[1] = 0;
      held = res;
      for (int c = 0; c < 8; c++)
        for (int p = 0; p < 2; p++) begin
          vi = 1; ti = {p[0], 3'(c)}; yi = WORD_W'($signed($urandom % (2*rng)) - rng);
          s[p] += longint'(yi);
          @(negedge clk);
          vi = 0;
          if (!(c == 7 && p == 1)) begin
            checks++;
            if (px > 0 && !(c == 7) && (res[0] !== held[0] || res[1] !== held[1])) begin
              failures++; $display("held totals changed during accumulation");
            end
          end
        end
      e[0] = sat(s[0]); e[1] = sat(s[1]);
      checks++; if (res[0] !== e[0] || res[1] !== e[1]) begin failures++; $display("px %0d: got %0d %0d expected %0d %0d", px, res[0], res[1], e[0], e[1]); end
      checks++; if (tog === tog_prev) begin failures++; $display("toggle missing"); end
      tog_prev = tog;
      repeat ($urandom % 3) @(negedge clk);
    end
    checks++; if (nsat == 0) begin failures++; $display("no saturation exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

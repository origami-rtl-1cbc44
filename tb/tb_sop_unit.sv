// tb_sop_unit: feeds random patches and kernels every cycle (with random
// gaps) and compares each result, 4 cycles later, with the inner product
// computed here: drop W_FRAC fraction bits, saturate to 12 bits. Both small
// operands (exact results) and full-range operands (saturation) are used.
module tb_sop_unit;
  import origami_pkg::*;
  localparam int TAPS = 49;
  logic clk = 0, rst_n = 0;
  logic vi = 0, vo;
  logic signed [WORD_W-1:0] x [TAPS], w [TAPS];
  logic [3:0] ti = '0, to;
  logic signed [WORD_W-1:0] y;
  typedef struct { logic signed [WORD_W-1:0] y; logic [3:0] tag; int t; } exp_t;
  exp_t q [$];
  int checks = 0, failures = 0, cyc = 0, nsat = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  sop_unit #(.TAPS(TAPS)) dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(vi), .x_i(x), .w_i(w),
                              .tag_i(ti), .valid_o(vo), .y_o(y), .tag_o(to));

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n && vo) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin failures++; $display("unexpected valid"); end
    else begin
      e = q.pop_front();
      if (y !== e.y || to !== e.tag || cyc - e.t != 4) begin
        failures++; if (failures < 5) $display("got %0d/%0d lat %0d, expected %0d/%0d", y, to, cyc - e.t, e.y, e.tag);
      end
    end
  end

  initial begin
    foreach (x[i]) begin x[i] = '0; w[i] = '0; end
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      int rx, rw;
      longint s;
      exp_t e;
      rx = (i < 150) ? 64 : 2048; rw = (i < 150) ? 128 : 2048;
      vi = ($urandom % 4) != 0;
      ti = 4'($urandom);
      s = 0;
      for (int t = 0; t < TAPS; t++) begin
        x[t] = WORD_W'($signed($urandom % (2*rx)) - rx);
        w[t] = WORD_W'($signed($urandom % (2*rw)) - rw);
        s += longint'(x[t]) * longint'(w[t]);
      end
      s = s >>> W_FRAC;
      if (s > 2047) begin s = 2047; nsat++; end
      if (s < -2048) begin s = -2048; nsat++; end
      e.y = WORD_W'(s); e.tag = ti; e.t = cyc;
      if (vi) q.push_back(e);
      @(negedge clk);
    end
    vi = 0;
    repeat (6) @(negedge clk);
    checks++; if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    checks++; if (nsat == 0) begin failures++; $display("no saturation exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

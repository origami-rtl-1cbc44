// tb_origami_clkgen: checks that the fast clock has two rising edges per slow
// cycle, one at the slow rising edge and one half a cycle later, and that the
// phase flag is 0 in the first half of each slow cycle and 1 in the second.
`timescale 1ns/1ps
module tb_origami_clkgen;
  logic clk = 0, clk_sh = 0, rst_n = 0;
  logic clk_fast, phase;
  int checks = 0, failures = 0;
  int fast_edges = 0;

  always #2 clk = ~clk;
  initial begin #1; forever #2 clk_sh = ~clk_sh; end

  origami_clkgen dut (.clk_i(clk), .clk_shift_i(clk_sh), .rst_ni(rst_n),
                      .clk_fast_o(clk_fast), .phase_o(phase));

  always @(posedge clk_fast) fast_edges++;

  initial begin
    #400; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #9 rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < 20; i++) begin
      int e0;
      e0 = fast_edges;
      #0.5;                     // first half of the slow cycle
      checks++; if (phase !== 1'b0) begin failures++; $display("phase not 0 in first half"); end
      checks++; if (clk_fast !== 1'b1) begin failures++; $display("fast clock low after slow edge"); end
      #2;                       // second half
      checks++; if (phase !== 1'b1) begin failures++; $display("phase not 1 in second half"); end
      checks++; if (clk_fast !== 1'b1) begin failures++; $display("fast clock low in second half"); end
      @(posedge clk);
      checks++; if (fast_edges - e0 != 2) begin failures++; $display("%0d fast edges in a slow cycle", fast_edges - e0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

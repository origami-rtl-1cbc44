// tb_filter_bank: shifts in a random weight set in the documented order and
// checks, for every input channel and both phases, that each sum-of-products
// unit k receives the kernel of output channel 2k+phase.
module tb_filter_bank;
  import origami_pkg::*;
  localparam int NCH_T = 4, HK_T = 3, WK_T = 3, TAPS = HK_T*WK_T, N = NCH_T*NCH_T*TAPS;
  logic clk = 0;
  logic shift = 0, ph = 0;
  logic signed [WORD_W-1:0] wd = '0;
  logic [1:0] sc = '0;
  logic signed [WORD_W-1:0] wo [NCH_T/2][TAPS];
  logic signed [WORD_W-1:0] model [N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  filter_bank #(.P_NCH(NCH_T), .P_HK(HK_T), .P_WK(WK_T)) dut (
    .clk_i(clk), .shift_i(shift), .wdata_i(wd), .sel_ch_i(sc), .sel_phase_i(ph), .weights_o(wo));

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_all();
    for (int c = 0; c < NCH_T; c++)
      for (int p = 0; p < 2; p++) begin
        sc = c; ph = p; #1;
        for (int k = 0; k < NCH_T/2; k++)
          for (int t = 0; t < TAPS; t++) begin
            checks++;
            if (wo[k][t] !== model[((2*k+p)*NCH_T + c)*TAPS + t]) begin
              failures++; if (failures < 5) $display("c=%0d p=%0d k=%0d t=%0d", c, p, k, t);
            end
          end
      end
  endtask

  initial begin
    for (int round = 0; round < 2; round++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        shift = 1; wd = WORD_W'($urandom); model[i] = wd;
        @(negedge clk);
      end
      shift = 0;
      // holding: no change without shift
      repeat (3) @(negedge clk);
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

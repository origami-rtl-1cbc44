// tb_output_mux: presents sets of 8 totals with a toggle, at the fastest
// allowed rate (every 8 cycles) and with gaps, and checks the output stream:
// the 8 words of each set in channel order, each with valid, and no valid
// words in between sets.
module tb_output_mux;
  import origami_pkg::*;
  logic clk = 0, rst_n = 0;
  logic signed [WORD_W-1:0] res [8];
  logic tog = 0, vo;
  logic signed [WORD_W-1:0] dout;
  logic signed [WORD_W-1:0] q [$];
  int checks = 0, failures = 0, nvalid = 0, nsent = 0;

  always #5 clk = ~clk;

  output_mux #(.P_NCH(8)) dut (.clk_i(clk), .rst_ni(rst_n), .res_i(res), .done_tog_i(tog),
                              .out_valid_o(vo), .out_data_o(dout));

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n && vo) begin
    logic signed [WORD_W-1:0] e;
    nvalid++; checks++;
    if (q.size() == 0) begin failures++; $display("unexpected word"); end
    else begin
      e = q.pop_front();
      if (dout !== e) begin failures++; if (failures < 5) $display("got %0d expected %0d", dout, e); end
    end
  end

  initial begin
    foreach (res[i]) res[i] = '0;
    @(negedge clk); rst_n = 1;
    for (int s = 0; s < 30; s++) begin
      foreach (res[i]) begin res[i] = WORD_W'($urandom); q.push_back(res[i]); end
      tog = ~tog; nsent += 8;
      @(negedge clk);
      foreach (res[i]) res[i] = WORD_W'($urandom);   // totals may change after capture
      repeat (7 + ((s % 3 == 0) ? ($urandom % 5) : 0)) @(negedge clk);
    end
    repeat (12) @(negedge clk);
    checks++; if (nvalid != nsent || q.size() != 0) begin failures++; $display("sent %0d words, %0d expected", nvalid, nsent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

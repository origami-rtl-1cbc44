// tb_image_window_sram: writes random words to every address of a reduced
// memory (8 channels x 16 rows, 4 banks) and reads them back in random order,
// checking the one-cycle read latency, simultaneous read and write in the
// same cycle, and read-before-write on the same address.
module tb_image_window_sram;
  localparam int NCH_T = 8, WK_T = 7, H_T = 16, DEPTH = NCH_T*H_T, DW = WK_T*12;
  logic clk = 0;
  logic re = 0, we = 0;
  logic [$clog2(DEPTH)-1:0] ra = '0, wa = '0;
  logic [DW-1:0] rd, wd = '0;
  logic [DW-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  image_window_sram #(.P_NCH(NCH_T), .P_WK(WK_T), .P_HIN_MAX(H_T), .P_BANKS(4)) dut (
    .clk_i(clk), .re_i(re), .raddr_i(ra), .rdata_o(rd), .we_i(we), .waddr_i(wa), .wdata_i(wd));

  function automatic logic [DW-1:0] rnd();
    return {$urandom, $urandom, $urandom};
  endfunction

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; wa = a; wd = rnd(); model[a] = wd;
      @(negedge clk);
    end
    we = 0;
    // random reads while writing other random addresses
    for (int i = 0; i < 400; i++) begin
      logic [DW-1:0] exp_d;
      re = 1; ra = $urandom % DEPTH; exp_d = model[ra];
      we = $urandom % 2; wa = $urandom % DEPTH; wd = rnd();
      @(negedge clk);            // read result available now
      if (we) model[wa] = wd;
      re = 0; we = 0;
      checks++;
      if (rd !== exp_d) begin failures++; if (failures < 5) $display("addr %0d mismatch", ra); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sram_bist: runs the March C- test on a small memory twice: on a working
// memory (expects done and no fail, in the stated number of cycles) and on a
// memory with one bit stuck at 1 (expects fail). The memory is a simple model
// in this testbench with the same one-cycle read latency as the real one.
// Counting the edge that samples start, done is seen DEPTH*11+1 edges later.
module tb_sram_bist;
  localparam int DEPTH = 64, DW = 84;
  logic clk = 0, rst_n = 0, start = 0;
  logic active, done, fail, re, we;
  logic [5:0] ra, wa;
  logic [DW-1:0] rd, wd;
  logic [DW-1:0] mem [DEPTH];
  bit stuck = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sram_bist #(.DEPTH(DEPTH), .DATA_W(DW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .active_o(active), .done_o(done), .fail_o(fail),
    .re_o(re), .raddr_o(ra), .rdata_i(rd), .we_o(we), .waddr_o(wa), .wdata_o(wd));

  always @(posedge clk) begin
    if (re) rd <= mem[ra];
    if (we) begin
      mem[wa] <= wd;
      if (stuck && wa == 6'd37) mem[wa][13] <= 1'b1;
    end
  end

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(bit with_fault, bit exp_fail);
    int cycles;
    stuck = with_fault;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    checks++; if (fail !== exp_fail) begin failures++; $display("fault=%0d: fail=%0d", with_fault, fail); end
    checks++; if (cycles != DEPTH*11 + 1) begin failures++; $display("test took %0d cycles, expected %0d", cycles, DEPTH*11 + 1); end
    checks++; if (active) begin failures++; $display("still active after done"); end
  endtask

  initial begin
    foreach (mem[i]) mem[i] = '0;
    rd = '0;
    @(negedge clk); rst_n = 1;
    run(0, 0);
    run(1, 1);
    run(0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

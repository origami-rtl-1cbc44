// sram_bist: built-in self-test of the image window memory.
//
// A pulse on start_i runs a March C- test over all DEPTH words through the
// memory's read and write ports:
//   up(w0); up(r0,w1); up(r1,w0); down(r0,w1); down(r1,w0); up(r0)
// where 0 and 1 are all-zero and all-one words. A read element spends two
// cycles per address: the read is issued, and in the next cycle the word is
// compared and the complement written. active_o is high while the test owns
// the memory ports; done_o goes high at the end and stays high, fail_o is set
// by any mismatch. The test takes DEPTH*(1+4*2+2) cycles. The paper only
// states that the memories have a self-test; the algorithm is this design's
// choice.
module sram_bist #(
  parameter int unsigned DEPTH  = 4096,
  parameter int unsigned DATA_W = 84,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              start_i,
  output logic              active_o,
  output logic              done_o,
  output logic              fail_o,
  output logic              re_o,
  output logic [AW-1:0]     raddr_o,
  input  logic [DATA_W-1:0] rdata_i,
  output logic              we_o,
  output logic [AW-1:0]     waddr_o,
  output logic [DATA_W-1:0] wdata_o
);

  typedef enum logic [2:0] {E_W0, E_R0W1_UP, E_R1W0_UP, E_R0W1_DN, E_R1W0_DN, E_R0, E_DONE} elem_e;

  elem_e         elem_q;
  logic [AW-1:0] addr_q;
  logic          cmp_q;      // second cycle of a read element
  logic          active_q;

  logic          down, expect1, has_write, last_addr;

  always_comb begin
    down      = (elem_q == E_R0W1_DN) || (elem_q == E_R1W0_DN);
    expect1   = (elem_q == E_R1W0_UP) || (elem_q == E_R1W0_DN);
    has_write = (elem_q != E_R0);
    last_addr = down ? (addr_q == '0) : (addr_q == AW'(DEPTH - 1));
  end

  assign active_o = active_q;
  assign re_o     = active_q && (elem_q != E_W0) && !cmp_q;
  assign raddr_o  = addr_q;
  assign we_o     = active_q && ((elem_q == E_W0) || (cmp_q && has_write));
  assign waddr_o  = addr_q;
  // E_W0 writes 0; a read of 0 is followed by a write of 1 and vice versa
  assign wdata_o  = (elem_q == E_W0) ? '0 : (expect1 ? '0 : '1);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      elem_q   <= E_DONE;
      addr_q   <= '0;
      cmp_q    <= 1'b0;
      active_q <= 1'b0;
      done_o   <= 1'b0;
      fail_o   <= 1'b0;
    end else if (start_i && !active_q) begin
      elem_q   <= E_W0;
      addr_q   <= '0;
      cmp_q    <= 1'b0;
      active_q <= 1'b1;
      done_o   <= 1'b0;
      fail_o   <= 1'b0;
    end else if (active_q) begin
      if (elem_q == E_W0 || cmp_q) begin
        if (cmp_q && rdata_i != (expect1 ? {DATA_W{1'b1}} : {DATA_W{1'b0}})) fail_o <= 1'b1;
        cmp_q <= 1'b0;
        if (last_addr) begin
          elem_q <= elem_e'(elem_q + 1'b1);
          addr_q <= (elem_q == E_R1W0_UP || elem_q == E_R0W1_DN) ? AW'(DEPTH - 1) : '0;
          if (elem_q == E_R0) begin
            active_q <= 1'b0;
            done_o   <= 1'b1;
          end
        end else begin
          addr_q <= down ? addr_q - 1'b1 : addr_q + 1'b1;
        end
      end else begin
        cmp_q <= 1'b1;
      end
    end
  end

endmodule

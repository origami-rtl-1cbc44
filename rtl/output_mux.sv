// output_mux: output data bus multiplexer.
//
// The channel summers finish the NCH output-channel totals of one output
// pixel together. When done_tog_i changes (sampled in the slow domain) the
// NCH totals are copied into a holding buffer and sent on the output bus one
// per slow cycle, output channel 0 first, with out_valid_o high for each
// word. Because a pixel takes NCH slow cycles to accumulate, the buffer is
// always empty, or sending its last word, when the next totals arrive; an
// assertion checks this. The first word appears one cycle after the change is
// seen. Buffering and word order are this design's choices; the paper gives a
// mux from the channel summers to one 12-bit output bus plus one extra line,
// taken here to be the valid bit.
module output_mux
  import origami_pkg::*;
#(
  parameter int unsigned P_NCH = NCH,
  localparam int unsigned CNTW = $clog2(P_NCH + 1)
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic signed [WORD_W-1:0] res_i [P_NCH],
  input  logic                     done_tog_i,
  output logic                     out_valid_o,
  output logic signed [WORD_W-1:0] out_data_o
);

  logic signed [WORD_W-1:0] buf_q [P_NCH];
  logic [CNTW-1:0]          cnt_q;
  logic                     seen_q, fresh;

  assign fresh = (seen_q != done_tog_i);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      seen_q      <= 1'b0;
      cnt_q       <= '0;
      out_valid_o <= 1'b0;
      out_data_o  <= '0;
      buf_q       <= '{default: '0};
    end else begin
      if (fresh) buf_q <= res_i;
      seen_q      <= done_tog_i;
      out_valid_o <= (cnt_q != '0);
      if (cnt_q != '0) out_data_o <= buf_q[P_NCH - int'(cnt_q)];
      if (fresh)              cnt_q <= CNTW'(P_NCH);
      else if (cnt_q != '0)   cnt_q <= cnt_q - 1'b1;
    end
  end

  a_no_overrun: assert property (@(posedge clk_i) disable iff (!rst_ni) fresh |-> cnt_q <= 1)
    else $error("output_mux: new totals before the previous pixel was sent");

endmodule

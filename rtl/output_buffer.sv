// output_buffer: FIFO of finished attention scores.
//
// DEPTH entries of W bits. push writes din when not full (a push into a
// full buffer is a caller error, flagged by an assertion); the host takes
// the oldest entry with a valid/ready handshake (dout is valid when valid is
// high, and leaves when ready is also high). Push and pop may happen in the
// same cycle. A pushed word is visible on dout the next cycle. The macro
// has an output buffer; its depth and handshake are this design's choice.
module output_buffer #(
  parameter int unsigned DEPTH = 4,
  parameter int unsigned W     = 36
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  output logic         full,
  output logic         valid,
  input  logic         ready,
  output logic [W-1:0] dout
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_q, wr_q;
  logic [AW:0]   cnt_q;
  logic          pop;

  assign full  = (cnt_q == (AW+1)'(DEPTH));
  assign valid = (cnt_q != '0);
  assign pop   = valid & ready;
  assign dout  = mem[rd_q];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
      for (int n = 0; n < DEPTH; n++) mem[n] <= '0;
    end else begin
      if (push) begin
        mem[wr_q] <= din;
        wr_q      <= inc(wr_q);
      end
      if (pop) rd_q <= inc(rd_q);
      cnt_q <= cnt_q + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> !full)
    else $error("output_buffer: push while full");
endmodule

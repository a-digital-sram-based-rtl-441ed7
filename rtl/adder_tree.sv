// adder_tree: sums the per-array partial sums of the CIM bank.
//
// N signed IN_W-bit inputs (one 14-bit Psum per SRAM array) are added in a
// balanced binary tree of log2(N) levels into one signed OUT_W-bit sum, the
// sum over the weight column j' in the score formula. The result is
// registered: the sum of the inputs of cycle t appears in cycle t+1. N must
// be a power of two. The published block diagram names this tree; its
// balanced shape, width and single output register are this design's choice.
module adder_tree #(
  parameter int unsigned N     = 64,
  parameter int unsigned IN_W  = 14,
  parameter int unsigned OUT_W = IN_W + $clog2(N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [IN_W-1:0]  din [N],
  output logic signed [OUT_W-1:0] sum
);
  localparam int unsigned LV = $clog2(N);

  logic signed [OUT_W-1:0] lvl [LV+1][N];

  always_comb begin
    for (int l = 0; l <= LV; l++) begin
      for (int k = 0; k < N; k++) lvl[l][k] = '0;
    end
    for (int k = 0; k < N; k++) lvl[0][k] = OUT_W'(din[k]);
    for (int l = 0; l < LV; l++) begin
      for (int k = 0; k < (N >> (l + 1)); k++) begin
        lvl[l+1][k] = lvl[l][2*k] + lvl[l][2*k+1];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sum <= '0;
    else        sum <= lvl[LV][0];
  end

  initial begin
    assert ((1 << LV) == N) else $fatal(1, "adder_tree: N must be a power of two");
  end
endmodule

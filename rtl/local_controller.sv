// local_controller: column decoder and per-array control of the CIM bank.
//
// In read/write mode the column address is decoded one-hot: the selected
// array gets its word-line gate (col_en) and, for a write, its write enable.
// In compute mode every array's gate is the token bit x_jj'(j*) of its
// column j' (the x_j bitplane), so all 64 arrays work in parallel on the
// same row and an array whose bit is 0 reads 0. The compute-valid strobe to
// the accumulators is the row-issue valid of the same cycle. rd_valid_q marks
// the cycle after a read request, when the bank's rd_data holds the word. The published block diagram only
// names a local controller and draws the column decoder; the contents here
// are this design's simplest version of that gating.
module local_controller #(
  parameter int unsigned ARRAYS = 64
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      compute,
  input  logic                      issue_valid,
  input  logic [ARRAYS-1:0]         x_j_plane,
  input  logic                      we,
  input  logic                      re,
  input  logic [$clog2(ARRAYS)-1:0] col_addr,
  output logic [ARRAYS-1:0]         col_en,
  output logic [ARRAYS-1:0]         arr_we,
  output logic                      acc_valid,
  output logic                      rd_valid_q
);
  logic [ARRAYS-1:0] col_dec;

  always_comb begin
    col_dec = '0;
    col_dec[col_addr] = 1'b1;
    if (compute) begin
      col_en = x_j_plane;
      arr_we = '0;
    end else begin
      col_en = col_dec & {ARRAYS{we | re}};
      arr_we = col_dec & {ARRAYS{we}};
    end
    acc_valid = compute & issue_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid_q <= 1'b0;
    end else begin
      rd_valid_q <= re & ~we & ~compute;
    end
  end
endmodule

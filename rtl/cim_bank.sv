// cim_bank: the CIM bank, 64 SRAM arrays with their word-line logic and
// per-array accumulators.
//
// Array j' holds column j' of W_QK, row i' of every array holds row i'. One
// compute cycle takes one row i' (from the input buffer, only rows whose
// token bit x_ii'(i*) is 1 when zero skipping is on): the word line unit
// raises row i' if x_ii'(i*) is 1, each array j' lets it through if
// x_jj'(j*) is 1, and every array's read bit lines give
// x_ii'(i*) x_jj'(j*) w_QK[i'][j'], which its accumulator adds in. After the
// rows of one bit pair (i*, j*), psum[j'] = sum_i' x_ii'(i*) x_jj'(j*)
// w_QK[i'][j'] for all 64 columns at once, ready for the adder tree. The
// first row of a pair (issue_first) restarts every sum, so the rows of the
// next pair may follow the last row of the previous one without a gap.
//
// Modes: compute = 1 selects compute mode (word lines from issue.row and the
// input bits). Otherwise we writes wdata to (row_addr, col_addr) at the clock
// edge and re returns that word on rd_data one cycle later with rd_valid.
// Timing: a row issued in cycle t is in psum after the edge ending cycle
// t+1, so the sums of a pair whose last row was issued in cycle d are on
// psum during cycle d+2; acc_clr clears all psums at the next edge. The array organisation,
// the word-line gating and one accumulator per array follow the published
// bank; the read port timing is this design's choice.
module cim_bank #(
  parameter int unsigned ROWS   = cim_pkg::ROWS,
  parameter int unsigned ARRAYS = cim_pkg::ARRAYS,
  parameter int unsigned WBITS  = cim_pkg::WBITS,
  parameter int unsigned PSUM_W = cim_pkg::PSUM_W
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // compute side
  input  logic                            compute,
  input  logic                            issue_valid,
  input  logic [$clog2(ROWS)-1:0]         issue_row,
  input  logic                            issue_x_bit,
  input  logic                            issue_first,
  input  logic [ARRAYS-1:0]               x_j_plane,
  input  logic                            acc_clr,
  output logic signed [PSUM_W-1:0]        psum [ARRAYS],
  // read/write side
  input  logic                            we,
  input  logic                            re,
  input  logic [$clog2(ROWS)-1:0]         row_addr,
  input  logic [$clog2(ARRAYS)-1:0]       col_addr,
  input  logic [WBITS-1:0]                wdata,
  output logic [WBITS-1:0]                rd_data,
  output logic                            rd_valid
);
  logic [ROWS-1:0]         wl;
  logic [ARRAYS-1:0]       col_en, arr_we;
  logic                    acc_valid;
  logic [WBITS-1:0]        rbl [ARRAYS];
  logic [$clog2(ROWS)-1:0] wl_addr;

  assign wl_addr = compute ? issue_row : row_addr;

  wordline_unit #(.ROWS(ROWS)) u_wl (
    .addr          (wl_addr),
    .chip_enable   (compute ? issue_valid : (we | re)),
    .compute_enable(compute),
    .x_i_bit       (issue_x_bit),
    .wl            (wl)
  );

  local_controller #(.ARRAYS(ARRAYS)) u_lc (
    .clk        (clk),
    .rst_n      (rst_n),
    .compute    (compute),
    .issue_valid(issue_valid),
    .x_j_plane  (x_j_plane),
    .we         (we),
    .re         (re),
    .col_addr   (col_addr),
    .col_en     (col_en),
    .arr_we     (arr_we),
    .acc_valid  (acc_valid),
    .rd_valid_q (rd_valid)
  );

  for (genvar j = 0; j < ARRAYS; j++) begin : g_arr
    sram_array #(.ROWS(ROWS), .WBITS(WBITS)) u_arr (
      .clk   (clk),
      .wl    (wl),
      .col_en(col_en[j]),
      .we    (arr_we[j]),
      .wdata (wdata),
      .rbl   (rbl[j])
    );
    cim_accumulator #(.WBITS(WBITS), .PSUM_W(PSUM_W)) u_acc (
      .clk      (clk),
      .rst_n    (rst_n),
      .clr      (acc_clr),
      .rbl      (rbl[j]),
      .rbl_valid(acc_valid),
      .rbl_first(issue_first),
      .psum     (psum[j])
    );
  end

  // Read_Data: word of the addressed array, registered
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rd_data <= '0;
    else if (re) rd_data <= rbl[col_addr];
  end
endmodule

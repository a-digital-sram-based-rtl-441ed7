// tb_cim_bank: the bank at its full 64 x 64 size. Writes a random W_QK,
// reads part of it back, then runs bit-pair passes: random rows with random
// input bits x_ii'(i*) and a random x_j bitplane, and checks every one of the
// 64 partial sums against sum over the rows of x_i bit * x_j bit * w, two
// cycles after the last row. Passes follow each other without a gap, the
// first row of each restarting the sums; one pass starts after a clear.
module tb_cim_bank;
  localparam int R = 64, A = 64, WB = 8, PW = 14;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic compute = 0, iv = 0, xb = 0, first = 0, acc_clr = 0, we = 0, re = 0, rd_valid;
  logic [5:0] irow = '0, row = '0, col = '0;
  logic [A-1:0] xj = '0;
  logic [WB-1:0] wdata = '0, rd_data;
  logic signed [PW-1:0] psum [A];
  logic signed [WB-1:0] w [R][A];

  cim_bank #(.ROWS(R), .ARRAYS(A), .WBITS(WB), .PSUM_W(PW)) dut (
    .clk(clk), .rst_n(rst_n), .compute(compute), .issue_valid(iv), .issue_row(irow),
    .issue_x_bit(xb), .issue_first(first), .x_j_plane(xj), .acc_clr(acc_clr), .psum(psum),
    .we(we), .re(re), .row_addr(row), .col_addr(col), .wdata(wdata),
    .rd_data(rd_data), .rd_valid(rd_valid));

  always #5 clk = ~clk;

  int exp_prev [A];
  logic have_prev = 0;

  // the sums of the previous pass are on psum during the second cycle of this one
  task automatic check_prev();
    if (!have_prev) return;
    for (int j = 0; j < A; j++) begin
      checks++;
      if (int'(psum[j]) != exp_prev[j]) begin failures++; $display("FAIL psum[%0d]=%0d exp %0d", j, psum[j], exp_prev[j]); end
    end
    have_prev = 0;
  endtask

  task automatic pass(input int nrows, input int pct_x, input logic clear_first);
    int exp [A];
    for (int j = 0; j < A; j++) exp[j] = 0;
    if (clear_first) begin
      @(negedge clk); compute = 1; iv = 0; first = 0;
      @(negedge clk); check_prev(); acc_clr = 1;
      @(negedge clk); acc_clr = 0;
    end
    for (int n = 0; n < nrows; n++) begin
      if (n > 0 || !clear_first) @(negedge clk);
      if (n == 0) xj = {$urandom, $urandom};
      compute = 1; iv = 1; first = (n == 0);
      irow = 6'($urandom);
      xb = (($urandom % 100) < pct_x);
      for (int j = 0; j < A; j++) if (xb && xj[j]) exp[j] += int'(w[irow][j]);
      if (n == 1) check_prev();
    end
    if (nrows == 1) begin
      @(negedge clk); iv = 0; first = 0;
      check_prev();
    end
    exp_prev = exp;
    have_prev = 1;
  endtask

  task automatic finish_passes();
    @(negedge clk); iv = 0; first = 0;
    @(negedge clk);
    check_prev();
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < R; r++) for (int j = 0; j < A; j++) begin
      w[r][j] = WB'($urandom);
      @(negedge clk);
      we = 1; row = 6'(r); col = 6'(j); wdata = w[r][j];
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 200; n++) begin
      int r, j;
      r = $urandom % R; j = $urandom % A;
      @(negedge clk); re = 1; row = 6'(r); col = 6'(j);
      @(negedge clk); re = 0;
      checks++;
      if (!rd_valid || rd_data !== w[r][j]) begin failures++; $display("FAIL read (%0d,%0d)", r, j); end
    end
    @(negedge clk);
    for (int n = 0; n < 20; n++) pass(1 + ($urandom % 64), 70, n == 0 || n == 10);
    pass(64, 100, 1'b0);
    pass(1, 100, 1'b0);
    finish_passes();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

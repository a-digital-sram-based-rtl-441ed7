// tb_input_buffer_skip_zero: loads random sparse INT8 tokens, then asks for
// random bit pairs with and without zero skipping. The expected row stream
// is worked out from the tokens: with skipping, the rows whose x_i bit is 1,
// in ascending order, one per cycle, or an empty pair when either bitplane
// is zero; without, all 64 rows with the x_i bit attached. Also checks the
// x_j bitplane, the first-row flag and that pair_done comes with the last
// row. Half of the pairs are requested in the cycle of the previous
// pair_done, so their rows must follow without a gap.
module tb_input_buffer_skip_zero;
  localparam int D = 64, K = 8;
  int checks = 0, failures = 0;
  int n_empty = 0, n_skip_rows = 0, n_noskip = 0;
  logic clk = 0, rst_n = 0;
  logic x_we = 0, x_sel = 0, skip_en = 0, pair_start = 0;
  logic [5:0] x_idx = '0;
  logic [7:0] x_data = '0;
  logic [2:0] ib = '0, jb = '0;
  logic issue_valid, issue_x_bit, issue_first, pair_done, pair_empty;
  logic [5:0] issue_row;
  logic [D-1:0] x_j_plane;
  logic [7:0] xi [D], xj [D];

  input_buffer_skip_zero #(.D(D), .K(K)) dut (
    .clk(clk), .rst_n(rst_n), .x_we(x_we), .x_sel(x_sel), .x_idx(x_idx), .x_data(x_data),
    .skip_en(skip_en), .pair_start(pair_start), .pair_ib(ib), .pair_jb(jb),
    .issue_valid(issue_valid), .issue_row(issue_row), .issue_x_bit(issue_x_bit),
    .issue_first(issue_first),
    .x_j_plane(x_j_plane), .pair_done(pair_done), .pair_empty(pair_empty));

  always #5 clk = ~clk;

  task automatic load(input int density);
    for (int s = 0; s < 2; s++) begin
      for (int n = 0; n < D; n++) begin
        logic [7:0] v;
        v = '0;
        for (int b = 0; b < K; b++) v[b] = (($urandom % 100) < density);
        if (s == 0) xi[n] = v; else xj[n] = v;
        @(negedge clk);
        x_we = 1; x_sel = s[0]; x_idx = 6'(n); x_data = v;
      end
    end
    @(negedge clk); x_we = 0;
  endtask

  int n_b2b = 0;

  task automatic pair(input logic [2:0] pi, input logic [2:0] pj, input logic sk, input logic b2b);
    logic [D-1:0] pli, plj;
    int exp_rows [$];
    int got, cyc;
    for (int n = 0; n < D; n++) begin pli[n] = xi[n][pi]; plj[n] = xj[n][pj]; end
    if (!sk) for (int n = 0; n < D; n++) exp_rows.push_back(n);
    else if (pli != '0 && plj != '0) for (int n = 0; n < D; n++) if (pli[n]) exp_rows.push_back(n);
    if (!b2b) @(negedge clk);
    else n_b2b++;
    ib = pi; jb = pj; skip_en = sk; pair_start = 1;
    @(negedge clk);
    pair_start = 0;
    checks++;
    if (x_j_plane !== plj) begin failures++; $display("FAIL x_j_plane"); end
    got = 0; cyc = 0;
    forever begin
      cyc++;
      if (exp_rows.size() == 0) begin
        checks++;
        if (!(pair_done && pair_empty && !issue_valid)) begin failures++; $display("FAIL empty pair"); end
        n_empty++;
        break;
      end
      checks += 4;
      if (!issue_valid) begin failures++; $display("FAIL no issue"); end
      if (issue_first !== (got == 0)) begin failures++; $display("FAIL first flag at %0d", got); end
      if (int'(issue_row) != exp_rows[got]) begin
        failures++; $display("FAIL row %0d exp %0d", issue_row, exp_rows[got]);
      end
      if (issue_x_bit !== (sk ? 1'b1 : pli[issue_row])) begin failures++; $display("FAIL x bit"); end
      got++;
      checks++;
      if (pair_done !== (got == exp_rows.size())) begin failures++; $display("FAIL done at %0d", got); end
      if (pair_done || got >= exp_rows.size()) break;
      @(negedge clk);
    end
    checks++;
    if (cyc != ((exp_rows.size() == 0) ? 1 : exp_rows.size())) begin failures++; $display("FAIL cycles"); end
    if (sk && exp_rows.size() != 0) n_skip_rows++;
    if (!sk) n_noskip++;
  endtask

  task automatic idle_check();
    @(negedge clk);
    pair_start = 0;
    checks++;
    if (issue_valid) begin failures++; $display("FAIL issue after done"); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    load(20);
    for (int n = 0; n < 60; n++) begin
      pair(3'($urandom), 3'($urandom), ($urandom % 4) != 0, n % 2 == 1);
      if (n % 2 == 1) idle_check();
    end
    load(3);
    for (int n = 0; n < 60; n++) begin
      pair(3'($urandom), 3'($urandom), 1'b1, n % 2 == 1);
      if (n % 2 == 1) idle_check();
    end
    checks++;
    if (n_empty == 0 || n_skip_rows == 0 || n_noskip == 0 || n_b2b == 0) begin
      failures++; $display("FAIL coverage empty=%0d skip=%0d noskip=%0d", n_empty, n_skip_rows, n_noskip);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

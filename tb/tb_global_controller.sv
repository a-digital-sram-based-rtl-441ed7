// tb_global_controller: the score sequencer against a model of the input
// buffer that answers each pair request with a random number of rows (0 =
// skipped pair, answered in one cycle). Checks the order of bit pairs
// (group 4, 1, 2, 3; j* fastest), that each pair is requested in the cycle
// the previous one is done, the shift / group-start / skip flags of every
// near-CIM accumulate and their order, the sign of every group add, the
// output write under a full output buffer (stall), and the total cycle
// count from the start cycle to the output write:
// sum over pairs of (rows, or 1 if skipped) + 6 + stall cycles.
module tb_global_controller;
  localparam int K = 8;
  int checks = 0, failures = 0;
  int n_stall = 0, n_empty = 0;
  logic clk = 0, rst_n = 0, start = 0, busy;
  logic pair_start, pair_done = 0, pair_empty = 0, acc_clr;
  logic [2:0] ib, jb;
  logic near_en, near_first, near_add, poly_clr, poly_en, poly_neg, out_full = 0, out_push, stall;
  logic [3:0] near_sh;
  cim_pkg::group_e group;

  global_controller #(.K(K)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(busy), .pair_start(pair_start),
    .pair_ib(ib), .pair_jb(jb), .pair_done(pair_done), .pair_empty(pair_empty),
    .acc_clr(acc_clr), .near_en(near_en), .near_first(near_first), .near_add(near_add),
    .near_sh(near_sh), .poly_clr(poly_clr), .poly_en(poly_en), .poly_neg(poly_neg),
    .out_full(out_full), .out_push(out_push), .group(group), .stall(stall));

  always #5 clk = ~clk;

  int exp_i [$], exp_j [$], exp_first [$];
  int exp_sh [$], exp_f [$], exp_a [$];
  int remaining, pidx, max_rows_g, empty_pct_g;
  longint exp_cyc;

  task automatic on_pair_start();
    int rows;
    checks++;
    if (int'(ib) != exp_i[pidx] || int'(jb) != exp_j[pidx]) begin
      failures++; $display("FAIL pair %0d got (%0d,%0d)", pidx, ib, jb);
    end
    rows = (($urandom % 100) < empty_pct_g) ? 0 : 1 + ($urandom % max_rows_g);
    remaining = rows;
    if (rows == 0) begin exp_cyc += 1; n_empty++; end
    else exp_cyc += rows;
    exp_sh.push_back(exp_i[pidx] + exp_j[pidx]);
    exp_f.push_back(exp_first[pidx]);
    exp_a.push_back(rows != 0);
    pidx++;
  endtask

  task automatic score(input int max_rows, input int empty_pct, input int full_cycles);
    int cyc, npoly, nfull;
    exp_i.delete(); exp_j.delete(); exp_first.delete();
    for (int i = 0; i < K-1; i++) for (int j = 0; j < K-1; j++) begin
      exp_i.push_back(i); exp_j.push_back(j); exp_first.push_back(i == 0 && j == 0);
    end
    exp_i.push_back(K-1); exp_j.push_back(K-1); exp_first.push_back(1);
    for (int j = 0; j < K-1; j++) begin exp_i.push_back(K-1); exp_j.push_back(j); exp_first.push_back(j == 0); end
    for (int i = 0; i < K-1; i++) begin exp_i.push_back(i); exp_j.push_back(K-1); exp_first.push_back(i == 0); end
    max_rows_g = max_rows; empty_pct_g = empty_pct;
    exp_cyc = 6 + full_cycles;
    cyc = 1; remaining = -1; npoly = 0; pidx = 0; nfull = full_cycles;
    @(negedge clk);
    start = 1;
    #1;
    checks += 2;
    if (!pair_start || !acc_clr) begin failures++; $display("FAIL no pair start with start"); end
    if (!poly_clr) begin failures++; $display("FAIL no poly_clr"); end
    on_pair_start();
    forever begin
      @(posedge clk);
      #1;
      start = 0;
      cyc++;
      // model of the input buffer: its answer in this cycle
      pair_done = 0; pair_empty = 0;
      if (remaining == 0) begin pair_done = 1; pair_empty = 1; remaining = -1; end
      else if (remaining > 0) begin
        remaining--;
        if (remaining == 0) begin pair_done = 1; remaining = -1; end
      end
      // output buffer full for the first full_cycles cycles after the last group add
      if (npoly == 4) begin
        out_full = (nfull > 0);
        if (nfull > 0) nfull--;
      end
      #1;
      checks++;
      if (pair_start !== (pair_done && pidx < K*K)) begin failures++; $display("FAIL pair_start timing at pair %0d", pidx); end
      if (pair_start) on_pair_start();
      if (near_en) begin
        checks++;
        if (exp_sh.size() == 0 || int'(near_sh) != exp_sh[0] || int'(near_first) != exp_f[0] || int'(near_add) != exp_a[0]) begin
          failures++; $display("FAIL near sh=%0d first=%0d add=%0d", near_sh, near_first, near_add);
        end
        if (exp_sh.size() != 0) begin void'(exp_sh.pop_front()); void'(exp_f.pop_front()); void'(exp_a.pop_front()); end
      end
      if (poly_en) begin
        checks++;
        if (poly_neg !== (npoly >= 2)) begin failures++; $display("FAIL poly_neg group %0d", npoly); end
        npoly++;
      end
      if (stall) n_stall++;
      if (out_push) break;
      if (cyc > 10000) begin failures++; $display("FAIL hang pidx=%0d npoly=%0d", pidx, npoly); break; end
    end
    out_full = 0;
    checks += 4;
    if (pidx != K*K) begin failures++; $display("FAIL %0d pairs", pidx); end
    if (npoly != 4) begin failures++; $display("FAIL %0d group adds", npoly); end
    if (exp_sh.size() != 0) begin failures++; $display("FAIL missing near adds"); end
    if (cyc != exp_cyc) begin failures++; $display("FAIL cycles %0d exp %0d", cyc, exp_cyc); end
    @(posedge clk);
    #1;
    checks++;
    if (busy) begin failures++; $display("FAIL busy after score"); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    score(1, 0, 0);
    score(5, 30, 3);
    score(64, 50, 0);
    score(3, 100, 1);
    checks++;
    if (n_stall == 0 || n_empty == 0) begin failures++; $display("FAIL coverage"); end
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

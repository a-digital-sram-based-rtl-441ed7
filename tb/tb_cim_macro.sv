// tb_cim_macro: end-to-end test of the whole macro at its full size
// (64 x 64 INT8 W_QK, 64-element INT8 tokens).
//
// Writes a W_QK, loads token pairs and checks every score against the
// integer reference s = sum_a sum_b x_i[a] * W_QK[a][b] * x_j[b], and the
// latency from start to the score against the cycle rule of the sequencer:
// sum over the 64 bit pairs of (rows, or 1 if the pair is dropped) + 6 +
// stall cycles, where rows is the number of 1 bits in the x_i
// bitplane (all 64 without skipping) and a pair is dropped when either
// bitplane is zero. Cases: dense and sparse random tokens, zero-padded
// tokens, the extremes (all -128, all +127), skipping on and off, a read-back
// of the weights between scores (mode switch), and five scores with the host
// not reading so the output buffer fills and the macro stalls. Each of these
// mechanisms is counted and must occur.
module tb_cim_macro;
  import cim_pkg::*;
  int checks = 0, failures = 0;
  int n_row_skip = 0, n_pair_drop = 0, n_noskip = 0, n_stall = 0, n_readback = 0;
  longint lat_skip = 0, lat_noskip = 0;

  logic clk = 0, rst_n = 0;
  logic w_we = 0, w_re = 0, w_rvalid;
  logic [5:0] w_row = '0, w_col = '0;
  logic [7:0] w_wdata = '0, w_rdata;
  logic x_we = 0, x_sel = 0;
  logic [5:0] x_idx = '0;
  logic [7:0] x_data = '0;
  logic skip_en = 1, start = 0, busy;
  logic s_valid, s_ready = 1;
  logic signed [S_W-1:0] s_data;

  logic signed [7:0] W [ROWS][ARRAYS];
  logic signed [7:0] XI [ROWS], XJ [ROWS];
  longint cyc = 0;

  cim_macro dut (
    .clk(clk), .rst_n(rst_n),
    .w_we(w_we), .w_re(w_re), .w_row(w_row), .w_col(w_col), .w_wdata(w_wdata),
    .w_rdata(w_rdata), .w_rvalid(w_rvalid),
    .x_we(x_we), .x_sel(x_sel), .x_idx(x_idx), .x_data(x_data),
    .skip_en(skip_en), .start(start), .busy(busy),
    .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (dut.u_ctrl.stall) n_stall++;

  task automatic write_w(input int mode);
    for (int a = 0; a < ROWS; a++) for (int b = 0; b < ARRAYS; b++) begin
      case (mode)
        0: W[a][b] = 8'($urandom);
        1: W[a][b] = -8'sd128;
        default: W[a][b] = 8'sd127;
      endcase
      @(negedge clk);
      w_we = 1; w_row = 6'(a); w_col = 6'(b); w_wdata = W[a][b];
    end
    @(negedge clk); w_we = 0;
  endtask

  task automatic readback(input int n);
    for (int k = 0; k < n; k++) begin
      int a, b;
      a = $urandom % ROWS; b = $urandom % ARRAYS;
      @(negedge clk); w_re = 1; w_row = 6'(a); w_col = 6'(b);
      @(negedge clk); w_re = 0;
      checks++;
      if (!w_rvalid || w_rdata !== W[a][b]) begin failures++; $display("FAIL readback (%0d,%0d)", a, b); end
      n_readback++;
    end
  endtask

  // mode: 0 random with bit density pct, 1 zero-padded (second half 0),
  // 2 all -128, 3 all +127
  task automatic load_x(input int mode, input int pct);
    for (int s = 0; s < 2; s++) for (int n = 0; n < ROWS; n++) begin
      logic [7:0] v;
      v = '0;
      case (mode)
        2: v = 8'h80;
        3: v = 8'h7F;
        default: begin
          for (int b = 0; b < K; b++) v[b] = (($urandom % 100) < pct);
          if (mode == 1 && n >= ROWS/2) v = '0;
        end
      endcase
      if (s == 0) XI[n] = v; else XJ[n] = v;
      @(negedge clk);
      x_we = 1; x_sel = s[0]; x_idx = 6'(n); x_data = v;
    end
    @(negedge clk); x_we = 0;
  endtask

  function automatic longint ref_score();
    longint s;
    s = 0;
    for (int a = 0; a < ROWS; a++) for (int b = 0; b < ARRAYS; b++)
      s += longint'(XI[a]) * longint'(W[a][b]) * longint'(XJ[b]);
    return s;
  endfunction

  function automatic longint ref_cycles(input logic sk);
    longint c;
    c = 6;
    for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) begin
      int rows;
      logic any_j;
      rows = 0; any_j = 0;
      for (int n = 0; n < ROWS; n++) begin
        if (XI[n][i]) rows++;
        if (XJ[n][j]) any_j = 1;
      end
      if (!sk) c += ROWS;
      else if (rows == 0 || !any_j) c += 1;
      else c += rows;
    end
    return c;
  endfunction

  // count, for the last loaded tokens, the skipped rows and dropped pairs
  task automatic count_skips();
    for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) begin
      int rows;
      logic any_j;
      rows = 0; any_j = 0;
      for (int n = 0; n < ROWS; n++) begin
        if (XI[n][i]) rows++;
        if (XJ[n][j]) any_j = 1;
      end
      if (rows == 0 || !any_j) n_pair_drop++;
      else n_row_skip += ROWS - rows;
    end
  endtask

  task automatic run_score(input logic sk);
    longint t0, exp_s, exp_c;
    exp_s = ref_score();
    exp_c = ref_cycles(sk);
    @(negedge clk);
    skip_en = sk; start = 1;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!s_valid) @(negedge clk);
    checks += 2;
    if (longint'(s_data) != exp_s) begin failures++; $display("FAIL score %0d exp %0d", s_data, exp_s); end
    if (cyc - t0 != exp_c) begin failures++; $display("FAIL latency %0d exp %0d", cyc - t0, exp_c); end
    if (sk) begin lat_skip += cyc - t0; count_skips(); end
    else begin lat_noskip += cyc - t0; n_noskip++; end
    @(negedge clk);  // s_ready is high: the score leaves the buffer
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    write_w(0);
    readback(20);
    // dense and sparse random tokens, with and without skipping
    load_x(0, 50); run_score(1); run_score(0);
    load_x(0, 10); run_score(1); run_score(0);
    load_x(1, 30); run_score(1);
    readback(10);
    load_x(0, 2);  run_score(1);
    // extremes
    write_w(1);
    load_x(2, 0);  run_score(1);
    load_x(3, 0);  run_score(1);
    write_w(2);
    load_x(2, 0);  run_score(1);
    // output buffer full: five scores without reading
    write_w(0);
    load_x(0, 20);
    begin
      longint exp_s;
      exp_s = ref_score();
      s_ready = 0;
      for (int n = 0; n < 5; n++) begin
        @(negedge clk); skip_en = 1; start = 1;
        @(negedge clk); start = 0;
        while (busy && !(n == 4 && dut.u_ctrl.stall)) @(negedge clk);
      end
      repeat (5) @(negedge clk);
      for (int n = 0; n < 5; n++) begin
        while (!s_valid) @(negedge clk);
        checks++;
        if (longint'(s_data) != exp_s) begin failures++; $display("FAIL queued score %0d", n); end
        s_ready = 1;
        @(negedge clk);
        s_ready = 0;
      end
      s_ready = 1;
    end
    checks += 5;
    if (n_row_skip == 0)  begin failures++; $display("FAIL no row was skipped"); end
    if (n_pair_drop == 0) begin failures++; $display("FAIL no pair was dropped"); end
    if (n_noskip == 0)    begin failures++; $display("FAIL no score without skipping"); end
    if (n_stall == 0)     begin failures++; $display("FAIL no output stall"); end
    if (n_readback == 0)  begin failures++; $display("FAIL no weight read-back"); end
    $display("mechanisms: rows skipped=%0d pairs dropped=%0d no-skip scores=%0d stall cycles=%0d readbacks=%0d",
             n_row_skip, n_pair_drop, n_noskip, n_stall, n_readback);
    $display("latency of the scores run both ways: skip=%0d no-skip=%0d cycles", lat_skip, lat_noskip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

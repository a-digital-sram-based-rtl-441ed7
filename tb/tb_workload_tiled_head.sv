// tb_workload_tiled_head: one attention score of a full-width head, tiled
// through the 64 x 64 macro.
//
// In the combined-weight form every head has its own W_QK of d_model x
// d_model. The macro holds one 64 x 64 tile, so a score of a wider model is
// the sum over tiles (a, b) of X_i[a-block] * W_QK[a-block][b-block] *
// X_j[b-block]^T: the host writes each tile, loads the two 64-element token
// slices, runs the macro and adds the partial scores. This test does that for
// one score at d_model = 512 (8 x 8 tiles, the ViT size) and at d_model = 768
// (12 x 12 tiles, the DETR size), with random INT8 weights and tokens that
// are zero-padded in their last quarter, and checks the sum against the
// integer reference. It also reports the cycles spent computing (without
// weight and token loading) with zero skipping on.
module tb_workload_tiled_head;
  import cim_pkg::*;
  int checks = 0, failures = 0;

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

  // the weight of (a, b) is generated from its position, so no large table
  // is stored: a fixed integer hash of the indices, cut to 8 bits
  function automatic logic signed [7:0] wqk(input int a, input int b, input int seed);
    int unsigned h;
    h = (a * 32'd2654435761) ^ (b * 32'd40503) ^ (seed * 32'd2246822519);
    h = h ^ (h >> 13);
    return 8'(h);
  endfunction

  task automatic head(input int dm, input int seed);
    logic signed [7:0] xi [], xj [];
    longint ref_s, got_s, comp_cyc, t0;
    int tiles;
    xi = new[dm]; xj = new[dm];
    for (int n = 0; n < dm; n++) begin
      xi[n] = (n < dm * 3 / 4) ? 8'($urandom) : 8'sd0;
      xj[n] = (n < dm * 3 / 4) ? 8'($urandom) : 8'sd0;
    end
    ref_s = 0;
    for (int a = 0; a < dm; a++) for (int b = 0; b < dm; b++)
      ref_s += longint'(xi[a]) * longint'(wqk(a, b, seed)) * longint'(xj[b]);
    got_s = 0; comp_cyc = 0;
    tiles = dm / ROWS;
    for (int ta = 0; ta < tiles; ta++) for (int tb = 0; tb < tiles; tb++) begin
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < ARRAYS; c++) begin
        @(negedge clk);
        w_we = 1; w_row = 6'(r); w_col = 6'(c); w_wdata = wqk(ta*ROWS + r, tb*ARRAYS + c, seed);
      end
      @(negedge clk); w_we = 0;
      for (int n = 0; n < ROWS; n++) begin
        @(negedge clk); x_we = 1; x_sel = 0; x_idx = 6'(n); x_data = xi[ta*ROWS + n];
        @(negedge clk); x_we = 1; x_sel = 1; x_idx = 6'(n); x_data = xj[tb*ARRAYS + n];
      end
      @(negedge clk); x_we = 0; start = 1;
      t0 = cyc;
      @(negedge clk); start = 0;
      while (!s_valid) @(negedge clk);
      comp_cyc += cyc - t0;
      got_s += longint'(s_data);
      @(negedge clk);
    end
    checks++;
    if (got_s != ref_s) begin failures++; $display("FAIL d_model=%0d score %0d exp %0d", dm, got_s, ref_s); end
    $display("d_model=%0d: %0d tiles, score %0d, %0d compute cycles (%0.1f us at 100 MHz)",
             dm, tiles * tiles, got_s, comp_cyc, real'(comp_cyc) / 100.0);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    head(512, 1);
    head(768, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// cim_macro: digital SRAM compute-in-memory macro for attention scores.
//
// Computes one attention score s_ij = X_i * W_QK * X_j^T per request, where
// W_QK = W_Q * W_K^T (64 x 64, INT8) is written once and stays in the SRAM
// arrays, and X_i, X_j are two INT8 token vectors of 64 elements. Because
// W_QK is fixed, nothing generated at run time (Q or K) ever has to be
// written into the memory. The score is built bit-serially: for every pair of
// bits (i*, j*) of the two tokens, the CIM bank adds the stored weights whose
// row bit and column bit are both 1 (AND of two bits, no multiplier), the
// adder tree sums the 64 columns, the near-CIM accumulator shifts by i*+j*
// and accumulates within one of four groups, and the polynomial addition
// unit adds or subtracts the four group sums (two's complement sign bits).
// The bank and the near-memory side work concurrently: the bank issues the
// rows of one pair after another without gaps while earlier pairs move
// through the adder tree and accumulators.
//
// Interface (all synchronous to clk, active-low asynchronous reset):
//   weights  w_we writes w_wdata to W_QK[w_row][w_col]; w_re reads it, the
//            word appears on w_rdata with w_rvalid one cycle later. Only
//            while idle (busy low): the arrays are in compute mode otherwise.
//   tokens   x_we writes x_data to element x_idx of X_i (x_sel 0) or X_j
//            (x_sel 1). Only while idle.
//   compute  start (while idle) computes the score of the loaded tokens;
//            skip_en 1 turns on zero-value bit skipping.
//   result   s_data/s_valid/s_ready: 4-deep output FIFO, 36-bit signed.
// Latency from start to the score in the FIFO: see global_controller; with
// zero skipping it shrinks with the number of 1 bits in the tokens.
module cim_macro
  import cim_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  // weight port
  input  logic                        w_we,
  input  logic                        w_re,
  input  logic [$clog2(ROWS)-1:0]     w_row,
  input  logic [$clog2(ARRAYS)-1:0]   w_col,
  input  logic [WBITS-1:0]            w_wdata,
  output logic [WBITS-1:0]            w_rdata,
  output logic                        w_rvalid,
  // token port
  input  logic                        x_we,
  input  logic                        x_sel,
  input  logic [$clog2(ROWS)-1:0]     x_idx,
  input  logic [K-1:0]                x_data,
  // control
  input  logic                        skip_en,
  input  logic                        start,
  output logic                        busy,
  // result
  output logic                        s_valid,
  input  logic                        s_ready,
  output logic signed [S_W-1:0]       s_data
);
  // The token vectors index both the rows (X_i) and the arrays (X_j) of
  // W_QK, so W_QK must be square.
  if (ROWS != ARRAYS) begin : g_bad_size
    $error("cim_macro: W_QK must be square (ROWS == ARRAYS)");
  end

  logic                       pair_start, pair_done, pair_empty;
  logic [$clog2(K)-1:0]       pair_ib, pair_jb;
  logic                       issue_valid, issue_x_bit, issue_first;
  logic [$clog2(ROWS)-1:0]    issue_row;
  logic [ARRAYS-1:0]          x_j_plane;
  logic                       acc_clr;
  logic signed [PSUM_W-1:0]   psum [ARRAYS];
  logic signed [TREE_W-1:0]   tree_sum;
  logic                       near_en, near_first, near_add, poly_clr, poly_en, poly_neg;
  logic [$clog2(2*K-1)-1:0]   near_sh;
  logic signed [S_W-1:0]      grp_sum, score;
  logic                       out_full, out_push;
  group_e                     group;
  logic                       stall;

  global_controller #(.K(K)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .busy      (busy),
    .pair_start(pair_start),
    .pair_ib   (pair_ib),
    .pair_jb   (pair_jb),
    .pair_done (pair_done),
    .pair_empty(pair_empty),
    .acc_clr   (acc_clr),
    .near_en   (near_en),
    .near_first(near_first),
    .near_add  (near_add),
    .near_sh   (near_sh),
    .poly_clr  (poly_clr),
    .poly_en   (poly_en),
    .poly_neg  (poly_neg),
    .out_full  (out_full),
    .out_push  (out_push),
    .group     (group),
    .stall     (stall)
  );

  input_buffer_skip_zero #(.D(ROWS), .K(K)) u_ibuf (
    .clk        (clk),
    .rst_n      (rst_n),
    .x_we       (x_we & ~busy),
    .x_sel      (x_sel),
    .x_idx      (x_idx),
    .x_data     (x_data),
    .skip_en    (skip_en),
    .pair_start (pair_start),
    .pair_ib    (pair_ib),
    .pair_jb    (pair_jb),
    .issue_valid(issue_valid),
    .issue_row  (issue_row),
    .issue_x_bit(issue_x_bit),
    .issue_first(issue_first),
    .x_j_plane  (x_j_plane),
    .pair_done  (pair_done),
    .pair_empty (pair_empty)
  );

  cim_bank #(.ROWS(ROWS), .ARRAYS(ARRAYS), .WBITS(WBITS), .PSUM_W(PSUM_W)) u_bank (
    .clk        (clk),
    .rst_n      (rst_n),
    .compute    (busy),
    .issue_valid(issue_valid),
    .issue_row  (issue_row),
    .issue_x_bit(issue_x_bit),
    .issue_first(issue_first),
    .x_j_plane  (x_j_plane),
    .acc_clr    (acc_clr),
    .psum       (psum),
    .we         (w_we & ~busy),
    .re         (w_re & ~busy),
    .row_addr   (w_row),
    .col_addr   (w_col),
    .wdata      (w_wdata),
    .rd_data    (w_rdata),
    .rd_valid   (w_rvalid)
  );

  adder_tree #(.N(ARRAYS), .IN_W(PSUM_W), .OUT_W(TREE_W)) u_tree (
    .clk  (clk),
    .rst_n(rst_n),
    .din  (psum),
    .sum  (tree_sum)
  );

  near_cim_accumulator #(.IN_W(TREE_W), .ACC_W(S_W), .K(K)) u_near (
    .clk  (clk),
    .rst_n(rst_n),
    .en   (near_en),
    .first(near_first),
    .add  (near_add),
    .sh   (near_sh),
    .din  (tree_sum),
    .acc  (grp_sum)
  );

  polynomial_addition_unit #(.W(S_W)) u_poly (
    .clk  (clk),
    .rst_n(rst_n),
    .clr  (poly_clr),
    .en   (poly_en),
    .neg  (poly_neg),
    .grp  (grp_sum),
    .s    (score)
  );

  output_buffer #(.DEPTH(4), .W(S_W)) u_obuf (
    .clk  (clk),
    .rst_n(rst_n),
    .push (out_push),
    .din  (score),
    .full (out_full),
    .valid(s_valid),
    .ready(s_ready),
    .dout (s_data)
  );

  a_no_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
      busy |-> !(w_we || x_we))
    else $error("cim_macro: weight or token write while computing");
endmodule

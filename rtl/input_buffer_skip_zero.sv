// input_buffer_skip_zero: token buffer with zero-value bit skipping.
//
// Holds the two INT8 token vectors of the score being computed, X_i and X_j
// (D elements each), loaded one element per cycle through x_we/x_sel/x_idx.
// For every bit pair (i*, j*) the controller asks for, it slices the two
// bitplanes x_ii'(i*) and x_jj'(j*) (bit i* of every element of X_i, bit j*
// of every element of X_j) and feeds the CIM bank one row per cycle.
//
// Zero skipping (skip_en = 1): only rows i' whose bit x_ii'(i*) is 1 are
// issued, found by a find-first-set scan that clears each row it issues; if
// either bitplane is all zero the whole pair is dropped without issuing a
// row. A zero x_jj'(j*) inside a nonzero plane cannot save a cycle, since all
// arrays run in parallel on the same row, so it only keeps that array's word
// line low. With skip_en = 0 every one of the D rows is issued and the input
// bit itself gates the word line.
//
// Timing: pair_start in cycle t latches the planes; rows are issued from
// cycle t+1, one per cycle, and pair_done is high in the cycle of the last
// issue. A dropped pair gives pair_done with pair_empty in cycle t+1 and no
// issue. issue_first marks the first row of a pair. pair_start may come in
// the same cycle as pair_done, so the next pair's rows follow without a gap.
// x_j_plane holds its value until the next pair_start. That the
// input buffer skips zero bits follows the published design; the scan
// mechanism, the skip_en switch and the load port are this design's choices.
module input_buffer_skip_zero #(
  parameter int unsigned D = 64,
  parameter int unsigned K = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // token load port
  input  logic                     x_we,
  input  logic                     x_sel,      // 0: X_i, 1: X_j
  input  logic [$clog2(D)-1:0]     x_idx,
  input  logic [K-1:0]             x_data,
  // pair request
  input  logic                     skip_en,
  input  logic                     pair_start,
  input  logic [$clog2(K)-1:0]     pair_ib,    // i*
  input  logic [$clog2(K)-1:0]     pair_jb,    // j*
  // row issue to the bank
  output logic                     issue_valid,
  output logic [$clog2(D)-1:0]     issue_row,
  output logic                     issue_x_bit,
  output logic                     issue_first,
  output logic [D-1:0]             x_j_plane,
  output logic                     pair_done,
  output logic                     pair_empty
);
  typedef enum logic [1:0] {IB_IDLE, IB_RUN, IB_EMPTY} ib_state_e;

  logic [K-1:0]   xi [D];
  logic [K-1:0]   xj [D];
  logic [D-1:0]   plane_i, plane_j;
  logic [D-1:0]   xi_plane_q, mask_q, mask_nxt;
  logic           first_q;
  ib_state_e      state_q;
  logic           last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < D; n++) begin
        xi[n] <= '0;
        xj[n] <= '0;
      end
    end else if (x_we) begin
      if (x_sel) xj[x_idx] <= x_data;
      else       xi[x_idx] <= x_data;
    end
  end

  // bitplane slicing
  always_comb begin
    for (int n = 0; n < D; n++) begin
      plane_i[n] = xi[n][pair_ib];
      plane_j[n] = xj[n][pair_jb];
    end
  end

  // find first set row of the remaining mask
  always_comb begin
    issue_row = '0;
    for (int n = D - 1; n >= 0; n--) begin
      if (mask_q[n]) issue_row = ($clog2(D))'(n);
    end
    mask_nxt = mask_q;
    mask_nxt[issue_row] = 1'b0;
    last = (mask_nxt == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= IB_IDLE;
      first_q    <= 1'b0;
      mask_q     <= '0;
      xi_plane_q <= '0;
      x_j_plane  <= '0;
    end else if (pair_start) begin
      first_q    <= 1'b1;
      xi_plane_q <= plane_i;
      x_j_plane  <= plane_j;
      if (!skip_en) begin
        mask_q  <= '1;
        state_q <= IB_RUN;
      end else if (plane_i == '0 || plane_j == '0) begin
        mask_q  <= '0;
        state_q <= IB_EMPTY;
      end else begin
        mask_q  <= plane_i;
        state_q <= IB_RUN;
      end
    end else begin
      unique case (state_q)
        IB_RUN: begin
          first_q <= 1'b0;
          mask_q  <= mask_nxt;
          if (last) state_q <= IB_IDLE;
        end
        IB_EMPTY: state_q <= IB_IDLE;
        default:  state_q <= IB_IDLE;
      endcase
    end
  end

  always_comb begin
    issue_valid = (state_q == IB_RUN);
    issue_x_bit = xi_plane_q[issue_row];
    issue_first = (state_q == IB_RUN) && first_q;
    pair_done   = (state_q == IB_EMPTY) || ((state_q == IB_RUN) && last);
    pair_empty  = (state_q == IB_EMPTY);
  end
endmodule

// global_controller: sequencer for one attention score s_ij.
//
// The score is split into four groups of bit pairs (i*, j*): group 4 (both
// bits below the sign bit), group 1 (both sign bits), group 2 (sign bit of
// x_i with each lower bit of x_j) and group 3 (each lower bit of x_i with
// the sign bit of x_j). Group 4, the general case, comes first, the other
// three follow in the order 1, 2, 3. Within a group j* runs fastest.
//
// The CIM bank and the near-memory module work concurrently. The controller
// starts the first pair in the start cycle and each further pair in the
// cycle in which the input buffer reports the previous one done, so the
// bank issues rows back to back across pairs. Each finished pair leaves a
// token (shift i*+j*, first/last pair of its group, group sign, skipped or
// not, last pair of the score) in a four-stage delay line that follows the
// data: +1 the last row word enters Psum, +2 the adder tree registers the
// 64 Psums, +3 the near-CIM accumulator adds the tree sum << (i*+j*)
// (loading instead on the first pair of a group, adding 0 for a skipped
// pair), +4 on the last pair of a group the polynomial unit adds or subtracts
// (groups 2 and 3) the group sum. After the last group the score goes to the
// output buffer, waiting there while the buffer is full (stall).
//
// Cycle count from the start cycle to the output write, inclusive:
// sum over the 64 pairs of (rows, or 1 for a skipped pair) + 6 + stall
// cycles; the score is on the output buffer's port one cycle later. The four groups, their order and signs, and the concurrency of
// bank and near-memory module follow the published design; the token delay
// line and the exact cycle plan are this design's choice.
module global_controller #(
  parameter int unsigned K = cim_pkg::K
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  output logic                       busy,
  // input buffer
  output logic                       pair_start,
  output logic [$clog2(K)-1:0]       pair_ib,
  output logic [$clog2(K)-1:0]       pair_jb,
  input  logic                       pair_done,
  input  logic                       pair_empty,
  // bank
  output logic                       acc_clr,
  // near-memory computing module
  output logic                       near_en,
  output logic                       near_first,
  output logic                       near_add,
  output logic [$clog2(2*K-1)-1:0]   near_sh,
  output logic                       poly_clr,
  output logic                       poly_en,
  output logic                       poly_neg,
  // output buffer
  input  logic                       out_full,
  output logic                       out_push,
  // status
  output cim_pkg::group_e            group,
  output logic                       stall
);
  typedef cim_pkg::group_e group_e;
  localparam group_e GRP4 = cim_pkg::GRP4;
  localparam group_e GRP1 = cim_pkg::GRP1;
  localparam group_e GRP2 = cim_pkg::GRP2;
  localparam group_e GRP3 = cim_pkg::GRP3;
  localparam int unsigned BW = $clog2(K);
  localparam int unsigned SW = $clog2(2*K-1);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_WAIT, S_OUT} state_e;

  typedef struct packed {
    logic          valid;
    logic          add;        // pair was not skipped
    logic [SW-1:0] shamt;        // i* + j*
    logic          first_g;    // first pair of its group
    logic          last_g;     // last pair of its group
    logic          neg;        // group is subtracted
    logic          last_s;     // last pair of the score
  } token_t;

  state_e        state_q;
  // next pair to start
  group_e        grp_q;
  logic [BW-1:0] ib_q, jb_q;
  // pair in the input buffer
  token_t        cur_q;
  token_t        tok1_q, tok2_q, tok3_q, tok4_q, tok0;
  logic          i_sign, j_sign, first_g, last_g;
  group_e        grp_n;
  logic [BW-1:0] ib_n, jb_n;

  // first and last bit index of a group along one operand
  function automatic logic [BW-1:0] grp_lo(input logic sign_part);
    return sign_part ? BW'(K-1) : '0;
  endfunction
  function automatic logic [BW-1:0] grp_hi(input logic sign_part);
    return sign_part ? BW'(K-1) : BW'(K-2);
  endfunction
  function automatic logic group_i_sign(input group_e g);
    return (g == GRP1) || (g == GRP2);
  endfunction
  function automatic logic group_j_sign(input group_e g);
    return (g == GRP1) || (g == GRP3);
  endfunction
  function automatic group_e next_group(input group_e g);
    unique case (g)
      GRP4:    return GRP1;
      GRP1:    return GRP2;
      GRP2:    return GRP3;
      default: return GRP4;
    endcase
  endfunction

  // position of the next pair within its group, and the pair after it
  always_comb begin
    i_sign  = group_i_sign(grp_q);
    j_sign  = group_j_sign(grp_q);
    first_g = (ib_q == grp_lo(i_sign)) && (jb_q == grp_lo(j_sign));
    last_g  = (ib_q == grp_hi(i_sign)) && (jb_q == grp_hi(j_sign));
    grp_n   = grp_q;
    ib_n    = ib_q;
    jb_n    = jb_q;
    if (last_g) begin
      grp_n = next_group(grp_q);
      ib_n  = grp_lo(group_i_sign(grp_n));
      jb_n  = grp_lo(group_j_sign(grp_n));
    end else if (jb_q == grp_hi(j_sign)) begin
      jb_n = grp_lo(j_sign);
      ib_n = ib_q + BW'(1);
    end else begin
      jb_n = jb_q + BW'(1);
    end
  end

  always_comb begin
    pair_start = ((state_q == S_IDLE) && start) ||
                 ((state_q == S_RUN) && pair_done && !cur_q.last_s);
    pair_ib    = ib_q;
    pair_jb    = jb_q;
    // token of the pair that finishes in this cycle
    tok0       = cur_q;
    tok0.valid = (state_q == S_RUN) && pair_done;
    tok0.add   = !pair_empty;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      grp_q   <= GRP4;
      ib_q    <= '0;
      jb_q    <= '0;
      cur_q   <= '0;
      tok1_q  <= '0;
      tok2_q  <= '0;
      tok3_q  <= '0;
      tok4_q  <= '0;
    end else begin
      tok1_q <= tok0;
      tok2_q <= tok1_q;
      tok3_q <= tok2_q;
      tok4_q <= tok3_q;
      if (pair_start) begin
        cur_q.valid   <= 1'b1;
        cur_q.add     <= 1'b1;
        cur_q.shamt    <= SW'(ib_q) + SW'(jb_q);
        cur_q.first_g <= first_g;
        cur_q.last_g  <= last_g;
        cur_q.neg     <= (grp_q == GRP2) || (grp_q == GRP3);
        cur_q.last_s  <= last_g && (grp_q == GRP3);
        grp_q         <= grp_n;
        ib_q          <= ib_n;
        jb_q          <= jb_n;
      end
      unique case (state_q)
        S_IDLE:  if (start) state_q <= S_RUN;
        S_RUN:   if (pair_done && cur_q.last_s) state_q <= S_WAIT;
        S_WAIT:  if (tok4_q.valid && tok4_q.last_s) state_q <= S_OUT;
        S_OUT:   if (!out_full) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy       = (state_q != S_IDLE);
    acc_clr    = (state_q == S_IDLE) && start;
    near_en    = tok3_q.valid;
    near_first = tok3_q.first_g;
    near_add   = tok3_q.add;
    near_sh    = tok3_q.shamt;
    poly_clr   = (state_q == S_IDLE) && start;
    poly_en    = tok4_q.valid && tok4_q.last_g;
    poly_neg   = tok4_q.neg;
    out_push   = (state_q == S_OUT) && !out_full;
    group      = grp_q;
    stall      = (state_q == S_OUT) && out_full;
  end
endmodule

// near_cim_accumulator: intra-group shift and accumulate.
//
// Each bit pair (i*, j*) gives one adder-tree sum T = sum_j' sum_i'
// x_ii'(i*) x_jj'(j*) w_QK[i'][j']. Its weight in the score is 2^(i*+j*),
// so this unit shifts T left by i*+j* and adds it into the group sum when en
// is high. first (with en) starts a new group: the sum is loaded instead of
// added, so the previous group's total stays readable for the cycle in
// which it is taken and no clearing cycle is needed. add = 0 (with en)
// contributes 0 instead of T, for a pair that was skipped. The sign of the
// group is applied later, in the polynomial addition unit. Shift-and-
// accumulate within a group follows the published near-memory module; the
// load/add controls and widths are this design's choice, wide enough that no
// sum of an INT8 score can overflow.
module near_cim_accumulator #(
  parameter int unsigned IN_W  = 20,
  parameter int unsigned ACC_W = 36,
  parameter int unsigned K     = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      en,
  input  logic                      first,
  input  logic                      add,
  input  logic [$clog2(2*K-1)-1:0]  sh,
  input  logic signed [IN_W-1:0]    din,
  output logic signed [ACC_W-1:0]   acc
);
  logic signed [ACC_W-1:0] shifted, term;

  always_comb begin
    shifted = ACC_W'(din) <<< sh;
    term    = add ? shifted : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= (first ? '0 : acc) + term;
  end
endmodule

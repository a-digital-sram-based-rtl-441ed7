// polynomial_addition_unit: inter-group addition and subtraction.
//
// The score is the signed sum of the four group sums of the bit-serial
// decomposition: + (sign bit x sign bit), - (sign bit of x_i x magnitude bits
// of x_j), - (magnitude bits of x_i x sign bit of x_j), + (magnitude x
// magnitude). A negation path (invert and add one) and a mux pick +g or -g;
// when en is high the result is added into s. clr clears s at the next edge
// (clr wins over en). The negate-and-mux path and the add/subtract of the
// four groups follow the published near-memory module; width is this
// design's choice.
module polynomial_addition_unit #(
  parameter int unsigned W = 36
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clr,
  input  logic                en,
  input  logic                neg,
  input  logic signed [W-1:0] grp,
  output logic signed [W-1:0] s
);
  logic signed [W-1:0] grp_n, term;

  always_comb begin
    grp_n = ~grp + W'(1);
    term  = neg ? grp_n : grp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   s <= '0;
    else if (clr) s <= '0;
    else if (en)  s <= s + term;
  end
endmodule

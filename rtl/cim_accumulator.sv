// cim_accumulator: per-array accumulator of the CIM bank.
//
// Each SRAM array has one. Its read bit lines carry, on a compute cycle, the
// weight w_QK[i'][j'] of the active row (or 0 when the row or the array was
// not activated). The word is captured in an input register together with
// its valid and first-row flags; one cycle later a mux passes it (or 0 on a
// non-compute cycle) to a sign extender, and the 14-bit bit-alternating
// adder adds it to the Psum register. On the first row of a bit pair the
// adder's other operand is 0 instead of Psum, so a new sum starts without a
// clearing cycle and the bank can begin the next pair while the previous
// Psum is still being read. Over up to 64 rows, Psum holds
// sum_i' x_ii'(i*) x_jj'(j*) w_QK[i'][j'] exactly.
//
// Timing: a word presented with rbl_valid in cycle t is in psum after the
// clock edge that ends cycle t+1, so the sum of a pair whose last row came in
// cycle d can be read during cycle d+2. clr (the Psum register's RST) clears
// psum at the next edge and discards a word presented in the same cycle.
// The input register, sign extension, 14-bit width and Psum register with
// reset follow the published accumulator; the first-row load and the reset
// style are this design's choice.
module cim_accumulator #(
  parameter int unsigned WBITS  = 8,
  parameter int unsigned PSUM_W = 14
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic [WBITS-1:0]         rbl,
  input  logic                     rbl_valid,
  input  logic                     rbl_first,
  output logic signed [PSUM_W-1:0] psum
);
  logic [WBITS-1:0]  rbl_q;
  logic              vld_q, first_q;
  logic [PSUM_W-1:0] addend, base, sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rbl_q   <= '0;
      vld_q   <= 1'b0;
      first_q <= 1'b0;
    end else begin
      rbl_q   <= rbl;
      vld_q   <= rbl_valid & ~clr;
      first_q <= rbl_first;
    end
  end

  // mux + sign extender; the first row of a pair starts from 0
  always_comb begin
    addend = vld_q ? {{(PSUM_W-WBITS){rbl_q[WBITS-1]}}, rbl_q} : '0;
    base   = (vld_q && first_q) ? '0 : psum;
  end

  bit_alt_adder #(.W(PSUM_W)) u_add (
    .a  (addend),
    .b  (base),
    .sum(sum)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   psum <= '0;
    else if (clr) psum <= '0;
    else          psum <= sum;
  end
endmodule

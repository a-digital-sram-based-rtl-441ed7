// full_adder: one-bit full adder cell of the accumulator's ripple chain.
//
// The macro's accumulator alternates two transistor-level full-adder
// flavours, a 28-transistor and a 14-transistor cell, to trade area against
// delay. Logically both are the same full adder, so one module stands for
// both; CELL_28T only records which flavour an instance represents and does
// not change the logic. Purely combinational: sum = a^b^ci, co = majority.
module full_adder #(
  parameter bit CELL_28T = 1'b1
) (
  input  logic a,
  input  logic b,
  input  logic ci,
  output logic sum,
  output logic co
);
  always_comb begin
    sum = a ^ b ^ ci;
    co  = (a & b) | (ci & (a ^ b));
  end
endmodule

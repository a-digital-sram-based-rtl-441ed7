// bit_alt_adder: W-bit ripple-carry adder built from alternating 28T/14T
// full adders.
//
// Bit 0 uses a 28T cell, bit 1 a 14T cell, and so on alternately up to bit
// W-1, as in the macro's 14-bit accumulator; the mix keeps most of the area
// and power saving of the small cell while the strong cells restore the
// carry so the ripple delay stays bounded. Logically it is a plain
// modulo-2^W adder: sum = a + b, carry in 0, final carry dropped (both are
// this design's choice). Purely combinational.
module bit_alt_adder #(
  parameter int unsigned W = 14
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] sum
);
  logic [W:0] c;
  assign c[0] = 1'b0;

  for (genvar n = 0; n < W; n++) begin : g_bit
    full_adder #(.CELL_28T((n % 2) == 0)) u_fa (
      .a  (a[n]),
      .b  (b[n]),
      .ci (c[n]),
      .sum(sum[n]),
      .co (c[n+1])
    );
  end
endmodule

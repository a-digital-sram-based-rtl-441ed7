// wordline_unit: data-driven word line unit (row decoder and input unit).
//
// Decodes the row address into ROWS lines. In read/write mode a word line is
// the decoded line ANDed with chip_enable. In compute mode a three-input AND
// merges the decoded line, compute_enable and the token bit x_ii'(i*), so a
// row whose input bit is 0 is never raised: the input bit itself multiplies
// the stored weight. A mux per row, steered by compute_enable, picks between
// the two. The three-input AND and the mode mux follow the published word
// line unit; feeding chip_enable into the compute path too is this design's
// choice. Purely combinational.
module wordline_unit #(
  parameter int unsigned ROWS = 64
) (
  input  logic [$clog2(ROWS)-1:0] addr,
  input  logic                    chip_enable,
  input  logic                    compute_enable,
  input  logic                    x_i_bit,
  output logic [ROWS-1:0]         wl
);
  logic [ROWS-1:0] dec;

  always_comb begin
    dec = '0;
    dec[addr] = 1'b1;
    for (int r = 0; r < ROWS; r++) begin
      wl[r] = compute_enable ? (dec[r] & compute_enable & x_i_bit & chip_enable)
                             : (dec[r] & chip_enable);
    end
  end
endmodule

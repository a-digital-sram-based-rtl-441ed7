// sram_array: one read-write separated SRAM array of the CIM bank.
//
// ROWS words of WBITS bits. In the macro, array j' holds column j' of the
// combined weight matrix W_QK: row i' stores w_QK[i'][j'] as an INT8 word.
// The row word lines are shared by all arrays; each array ANDs them with its
// own gate col_en (the column-decoder gate at the array's word-line entry),
// which in compute mode carries the token bit x_jj'(j*).
//
// Write and read use separate bit lines. A write stores wdata into every
// enabled row at the clock edge when we is high. The read bit lines are a
// wired OR of all enabled cells, as a domino read line that any stored 1
// discharges: with one row active it returns that word, with none it
// returns 0. This zero result is what makes the word line act as the
// multiplier by the input bits. Read is combinational (the accumulator
// registers it). The transistor-level 6T cell and the multi-level domino
// buffering of the read line are not modelled: they only carry the value.
module sram_array #(
  parameter int unsigned ROWS  = 64,
  parameter int unsigned WBITS = 8
) (
  input  logic             clk,
  input  logic [ROWS-1:0]  wl,
  input  logic             col_en,
  input  logic             we,
  input  logic [WBITS-1:0] wdata,
  output logic [WBITS-1:0] rbl
);
  logic [WBITS-1:0] mem [ROWS];
  logic [ROWS-1:0]  wl_g;

  assign wl_g = wl & {ROWS{col_en}};

  always_ff @(posedge clk) begin
    for (int r = 0; r < ROWS; r++) begin
      if (we && wl_g[r]) mem[r] <= wdata;
    end
  end

  always_comb begin
    rbl = '0;
    for (int r = 0; r < ROWS; r++) begin
      if (wl_g[r]) rbl = rbl | mem[r];
    end
  end
endmodule

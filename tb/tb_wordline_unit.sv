// tb_wordline_unit: exhaustive over row address and the three control
// inputs; the expected word lines are computed from the mode rules.
module tb_wordline_unit;
  localparam int R = 64;
  int checks = 0, failures = 0;
  logic [5:0] addr;
  logic ce, cmp, xb;
  logic [R-1:0] wl, exp;

  wordline_unit #(.ROWS(R)) dut (
    .addr(addr), .chip_enable(ce), .compute_enable(cmp), .x_i_bit(xb), .wl(wl));

  initial begin
    for (int a = 0; a < R; a++) begin
      for (int c = 0; c < 8; c++) begin
        addr = 6'(a); {ce, cmp, xb} = 3'(c);
        #1;
        exp = '0;
        if (cmp ? (ce && xb) : ce) exp[a] = 1'b1;
        checks++;
        if (wl !== exp) begin failures++; $display("FAIL a=%0d c=%0d wl=%h", a, c, wl); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_full_adder: exhaustive check of the one-bit full adder, both cell
// flavours, against integer addition a+b+ci = 2*co + sum.
module tb_full_adder;
  int checks = 0, failures = 0;
  logic a, b, ci, s28, c28, s14, c14;

  full_adder #(.CELL_28T(1'b1)) u_28 (.a(a), .b(b), .ci(ci), .sum(s28), .co(c28));
  full_adder #(.CELL_28T(1'b0)) u_14 (.a(a), .b(b), .ci(ci), .sum(s14), .co(c14));

  initial begin
    for (int v = 0; v < 8; v++) begin
      int tot;
      {a, b, ci} = 3'(v);
      #1;
      tot = int'(a) + int'(b) + int'(ci);
      checks += 2;
      if ({c28, s28} != 2'(tot)) begin failures++; $display("FAIL 28T v=%0d", v); end
      if ({c14, s14} != 2'(tot)) begin failures++; $display("FAIL 14T v=%0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

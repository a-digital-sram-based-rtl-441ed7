// tb_bit_alt_adder: the 14-bit alternating-cell ripple adder against
// modulo-2^14 integer addition, on corner cases and random operands.
module tb_bit_alt_adder;
  localparam int W = 14;
  int checks = 0, failures = 0;
  logic [W-1:0] a, b, s;

  bit_alt_adder #(.W(W)) dut (.a(a), .b(b), .sum(s));

  task automatic check(input logic [W-1:0] ta, input logic [W-1:0] tb);
    logic [W-1:0] exp;
    a = ta; b = tb;
    #1;
    exp = W'((int'(ta) + int'(tb)) % (1 << W));
    checks++;
    if (s !== exp) begin
      failures++;
      $display("FAIL a=%h b=%h sum=%h exp=%h", ta, tb, s, exp);
    end
  endtask

  initial begin
    check('0, '0);
    check('1, 14'd1);
    check('1, '1);
    check(14'h2AAA, 14'h1555);
    check(14'h2000, 14'h2000);
    for (int n = 0; n < 2000; n++) check(W'($urandom), W'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_polynomial_addition_unit: random group sums added or subtracted, with
// clears, against a 64-bit integer model.
module tb_polynomial_addition_unit;
  localparam int W = 36;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, en = 0, neg = 0;
  logic signed [W-1:0] grp = '0, s;
  longint model;

  polynomial_addition_unit #(.W(W)) dut (
    .clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .neg(neg), .grp(grp), .s(s));

  always #5 clk = ~clk;

  initial begin
    model = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      clr = ($urandom % 8) == 0;
      en  = ($urandom % 2) != 0;
      neg = ($urandom % 2) != 0;
      grp = W'(longint'($signed($urandom)) <<< ($urandom % 4));
      @(posedge clk);
      if (clr) model = 0;
      else if (en) model = neg ? model - longint'(grp) : model + longint'(grp);
      model = (model <<< 28) >>> 28;  // the unit wraps at 36 bits
      #1;
      checks++;
      if (longint'(s) != model) begin failures++; $display("FAIL s=%0d model=%0d", s, model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_adder_tree: 64 random signed 14-bit inputs (and the all-minimum and
// all-maximum cases) against an integer sum, one cycle after the inputs.
module tb_adder_tree;
  localparam int N = 64, IW = 14, OW = 20;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic signed [IW-1:0] din [N];
  logic signed [OW-1:0] sum;

  adder_tree #(.N(N), .IN_W(IW), .OUT_W(OW)) dut (.clk(clk), .rst_n(rst_n), .din(din), .sum(sum));

  always #5 clk = ~clk;

  task automatic run(input int mode);
    int exp;
    exp = 0;
    @(negedge clk);
    for (int k = 0; k < N; k++) begin
      din[k] = (mode == 0) ? IW'($urandom) : (mode == 1) ? {1'b1, {(IW-1){1'b0}}} : {1'b0, {(IW-1){1'b1}}};
      exp += int'(din[k]);
    end
    @(negedge clk);
    checks++;
    if (int'(sum) != exp) begin failures++; $display("FAIL sum=%0d exp=%0d", sum, exp); end
  endtask

  initial begin
    for (int k = 0; k < N; k++) din[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1);
    run(2);
    for (int n = 0; n < 500; n++) run(0);
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

// tb_near_cim_accumulator: random tree sums and shift amounts 0..14, with
// occasional group starts (load instead of add) and skipped pairs (add 0),
// against a 64-bit integer model.
module tb_near_cim_accumulator;
  localparam int IW = 20, AW = 36, K = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, first = 0, add = 0, en = 0;
  logic [3:0] sh = '0;
  logic signed [IW-1:0] din = '0;
  logic signed [AW-1:0] acc;
  longint model;

  near_cim_accumulator #(.IN_W(IW), .ACC_W(AW), .K(K)) dut (
    .clk(clk), .rst_n(rst_n), .en(en), .first(first), .add(add), .sh(sh), .din(din), .acc(acc));

  always #5 clk = ~clk;

  initial begin
    model = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      first = ($urandom % 20) == 0;
      add = ($urandom % 8) != 0;
      en  = ($urandom % 3) != 0;
      sh  = 4'($urandom % 15);
      din = IW'($urandom);
      @(posedge clk);
      if (en) model = (first ? 0 : model) + (add ? (longint'(din) <<< sh) : 0);
      model = (model <<< 28) >>> 28;  // the unit wraps at 36 bits
      #1;
      checks++;
      if (longint'(acc) != model) begin failures++; $display("FAIL acc=%0d model=%0d", acc, model); end
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

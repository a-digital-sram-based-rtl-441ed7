// tb_output_buffer: random push/pop traffic (never pushing into a full
// buffer) against a queue model; checks full, valid and data order.
module tb_output_buffer;
  localparam int D = 4, W = 36;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, push = 0, ready = 0, full, valid;
  logic [W-1:0] din = '0, dout;
  logic [W-1:0] q [$];
  int fulls = 0;

  output_buffer #(.DEPTH(D), .W(W)) dut (
    .clk(clk), .rst_n(rst_n), .push(push), .din(din), .full(full),
    .valid(valid), .ready(ready), .dout(dout));

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      checks += 2;
      if (full !== (q.size() == D)) begin failures++; $display("FAIL full n=%0d", n); end
      if (valid !== (q.size() != 0)) begin failures++; $display("FAIL valid n=%0d", n); end
      if (valid) begin
        checks++;
        if (dout !== q[0]) begin failures++; $display("FAIL data n=%0d", n); end
      end
      if (full) fulls++;
      push  = !full && (($urandom % 3) != 0);
      ready = ($urandom % 3) == 0;
      din   = {4'($urandom), $urandom};
      @(posedge clk);
      if (valid && ready) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL buffer never filled"); end
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

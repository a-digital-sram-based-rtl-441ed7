// tb_cim_accumulator: per-array accumulator against a cycle model.
// Random signed words, random valid, first-row flags and occasional clears;
// the model holds the one-cycle input register and adds sign-extended words
// modulo 2^14, starting from 0 on a first row. It
// also accumulates 64 words of -128 and of +127 (the extremes of one pair).
module tb_cim_accumulator;
  localparam int WB = 8, PW = 14;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, vld = 0, first = 0;
  logic [WB-1:0] rbl = '0;
  logic signed [PW-1:0] psum;
  int model, pend, pend_v, pend_f;

  cim_accumulator #(.WBITS(WB), .PSUM_W(PW)) dut (
    .clk(clk), .rst_n(rst_n), .clr(clr), .rbl(rbl), .rbl_valid(vld), .rbl_first(first), .psum(psum));

  always #5 clk = ~clk;

  function automatic int wrap(input int v);
    int r;
    r = v % (1 << PW);
    if (r < 0) r += (1 << PW);
    if (r >= (1 << (PW-1))) r -= (1 << PW);
    return r;
  endfunction

  task automatic step(input logic c, input logic v, input logic [WB-1:0] w, input logic f = 1'b0);
    clr = c; vld = v; rbl = w; first = f;
    @(posedge clk);
    // model of the edge
    if (c) model = 0;
    else if (pend_v != 0) model = wrap((pend_f != 0 ? 0 : model) + pend);
    pend   = int'($signed(w));
    pend_v = (v && !c) ? 1 : 0;
    pend_f = f ? 1 : 0;
    #1;
    checks++;
    if (int'(psum) != model) begin
      failures++;
      $display("FAIL t=%0t psum=%0d model=%0d", $time, psum, model);
    end
  endtask

  initial begin
    model = 0; pend = 0; pend_v = 0; pend_f = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    step(1, 0, '0);
    for (int n = 0; n < 64; n++) step(0, 1, 8'h80);
    step(0, 0, '0);
    checks++; if (int'(psum) != -8192) begin failures++; $display("FAIL min sum %0d", psum); end
    step(1, 0, '0);
    for (int n = 0; n < 64; n++) step(0, 1, 8'h7F);
    step(0, 0, '0);
    checks++; if (int'(psum) != 8128) begin failures++; $display("FAIL max sum %0d", psum); end
    for (int n = 0; n < 3000; n++)
      step(($urandom % 50) == 0, ($urandom % 4) != 0, WB'($urandom), ($urandom % 10) == 0);
    // back-to-back sums: first row of the next sum right after the last row
    for (int n = 0; n < 64; n++) step(0, 1, 8'h7F, n == 0);
    step(0, 1, 8'h05, 1'b1);
    checks++; if (int'(psum) != 8128) begin failures++; $display("FAIL back-to-back end %0d", psum); end
    step(0, 0, '0);
    checks++; if (int'(psum) != 5) begin failures++; $display("FAIL back-to-back start %0d", psum); end
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

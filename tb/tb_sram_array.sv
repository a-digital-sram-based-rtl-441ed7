// tb_sram_array: one SRAM array. Writes random words to every row, reads
// each back through a single word line, checks that a closed array gate or
// no word line reads 0, that two word lines read the OR of both words, and
// that a write with the array gate closed changes nothing.
module tb_sram_array;
  localparam int R = 64, WB = 8;
  int checks = 0, failures = 0;
  logic clk = 0, col_en = 0, we = 0;
  logic [R-1:0] wl = '0;
  logic [WB-1:0] wdata = '0, rbl;
  logic [WB-1:0] ref_mem [R];

  sram_array #(.ROWS(R), .WBITS(WB)) dut (
    .clk(clk), .wl(wl), .col_en(col_en), .we(we), .wdata(wdata), .rbl(rbl));

  always #5 clk = ~clk;

  task automatic chk(input logic [WB-1:0] exp, input string what);
    #1;
    checks++;
    if (rbl !== exp) begin failures++; $display("FAIL %s rbl=%h exp=%h", what, rbl, exp); end
  endtask

  initial begin
    // write all rows
    for (int r = 0; r < R; r++) begin
      ref_mem[r] = WB'($urandom);
      @(negedge clk);
      wl = '0; wl[r] = 1'b1; col_en = 1; we = 1; wdata = ref_mem[r];
    end
    @(negedge clk); we = 0; wl = '0;
    for (int r = 0; r < R; r++) begin
      wl = '0; wl[r] = 1'b1; col_en = 1;
      chk(ref_mem[r], "read");
      col_en = 0;
      chk('0, "gated");
    end
    wl = '0; col_en = 1;
    chk('0, "no wl");
    for (int n = 0; n < 50; n++) begin
      int r1, r2;
      r1 = $urandom % R; r2 = $urandom % R;
      wl = '0; wl[r1] = 1; wl[r2] = 1;
      chk(ref_mem[r1] | ref_mem[r2], "or");
    end
    // write with gate closed
    @(negedge clk); wl = '0; wl[5] = 1; col_en = 0; we = 1; wdata = ~ref_mem[5];
    @(negedge clk); we = 0; col_en = 1;
    chk(ref_mem[5], "gated write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

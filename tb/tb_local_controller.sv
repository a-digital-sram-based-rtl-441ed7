// tb_local_controller: random stimulus; checks column decoding, write
// enables, compute gating by the x_j bitplane and the read-valid delay.
module tb_local_controller;
  localparam int A = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, compute = 0, iv = 0, we = 0, re = 0;
  logic [A-1:0] xj = '0, col_en, arr_we;
  logic [5:0] col = '0;
  logic acc_valid, rdv;
  logic exp_rdv;

  local_controller #(.ARRAYS(A)) dut (
    .clk(clk), .rst_n(rst_n), .compute(compute), .issue_valid(iv), .x_j_plane(xj),
    .we(we), .re(re), .col_addr(col), .col_en(col_en), .arr_we(arr_we),
    .acc_valid(acc_valid), .rd_valid_q(rdv));

  always #5 clk = ~clk;

  initial begin
    logic [A-1:0] e_en, e_we;
    repeat (2) @(posedge clk);
    rst_n = 1;
    exp_rdv = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      // the read valid produced by the previous cycle's request
      checks++;
      if (rdv !== exp_rdv) begin failures++; $display("FAIL rdv n=%0d", n); end
      compute = ($urandom % 2) != 0;
      iv = ($urandom % 2) != 0;
      we = ($urandom % 3) == 0;
      re = ($urandom % 3) == 0;
      col = 6'($urandom);
      xj = {$urandom, $urandom};
      #1;
      e_en = '0; e_we = '0;
      if (compute) e_en = xj;
      else begin
        if (we || re) e_en[col] = 1'b1;
        if (we) e_we[col] = 1'b1;
      end
      checks += 3;
      if (col_en !== e_en) begin failures++; $display("FAIL col_en n=%0d", n); end
      if (arr_we !== e_we) begin failures++; $display("FAIL arr_we n=%0d", n); end
      if (acc_valid !== (compute && iv)) begin failures++; $display("FAIL acc_valid n=%0d", n); end
      exp_rdv = re && !we && !compute;
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

// tb_sng: drives random operands and random numbers into the stochastic
// number generator and checks every shift-register bit against
// op >= rnd (with directed cases of op == rnd and the extremes 0 and
// 255), the clear, and the hold when not shifting.
`timescale 1ns/1ps
module tb_sng;
  logic clk = 0, rst_n = 0, clr = 0, sht = 0;
  logic [7:0] op = 0, rnd = 1;
  logic [15:0] sr;
  always #5 clk = ~clk;
  sng #(.RND_W(8), .MAX_LEN(16)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [15:0] exp_sr;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 20; n++) begin
      clr = 1; @(negedge clk); clr = 0; exp_sr = '0;
      check(sr == 16'h0, "clear");
      for (int k = 0; k < 16; k++) begin
        op = 8'($urandom); rnd = 8'($urandom_range(255, 1));
        if (n == 0) op = 8'd0;
        if (n == 1) op = 8'd255;
        if (n == 2 || n == 3) begin op = op | 8'd1; rnd = op; end  // equal operands
        sht = ($urandom_range(3) != 0);
        @(negedge clk);
        if (sht) exp_sr = {exp_sr[14:0], (op >= rnd)};
        check(sr == exp_sr, $sformatf("sr %h exp %h", sr, exp_sr));
      end
      sht = 0;
      if (n == 0) check(sr == 16'h0, "zero operand gives zero stream");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

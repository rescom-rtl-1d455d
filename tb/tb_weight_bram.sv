// tb_weight_bram: fills the weight memory at full size (65536 words) with
// an address-derived pattern, then reads random and sequential addresses
// and checks the data and the one-cycle read latency, and that rd_en=0
// holds the output.
`timescale 1ns/1ps
module tb_weight_bram;
  import rescom_pkg::*;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [15:0] wr_addr = '0, rd_addr = '0; fix_t wr_data = '0, rd_data;
  always #5 clk = ~clk;
  weight_bram dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic logic [15:0] pat(input logic [15:0] a);
    return (a * 16'd40503) ^ 16'h5a5a;
  endfunction

  initial begin
    for (int a = 0; a < 65536; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 16'(a); wr_data = fix_t'(pat(16'(a)));
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 500; n++) begin
      logic [15:0] a;
      a = (n < 256) ? 16'(n + 16'h1200) : 16'($urandom);
      rd_en = 1; rd_addr = a; @(negedge clk);
      check(rd_data == fix_t'(pat(a)), $sformatf("addr %h data %h", a, rd_data));
      rd_en = 0; rd_addr = a + 16'd1; @(negedge clk);
      check(rd_data == fix_t'(pat(a)), "hold with rd_en low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (80000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

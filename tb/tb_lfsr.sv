// tb_lfsr: checks the configurable LFSR step by step against an
// independent model of the tap/XOR structure, the seed load, the hold when
// not enabled, and the period 255 of the maximal polynomial 8'h1D.
`timescale 1ns/1ps
module tb_lfsr;
  logic clk = 0, rst_n = 0, ld = 0, en = 0;
  logic [7:0] poly = 8'h1D, seed = 8'h01, q;
  always #5 clk = ~clk;
  lfsr #(.WIDTH(8)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic logic [7:0] model(input logic [7:0] s, input logic [7:0] p);
    logic fb = 0;
    for (int i = 0; i < 8; i++) fb = fb ^ (s[i] & p[7-i]);
    return {s[6:0], fb};
  endfunction

  initial begin
    logic [7:0] exp_q, first;
    int period;
    repeat (2) @(negedge clk); rst_n = 1;
    check(q == 8'h01, "reset value");
    // load a seed
    seed = 8'hA5; ld = 1; @(negedge clk); ld = 0;
    check(q == 8'hA5, "seed load");
    // hold without enable
    repeat (3) @(negedge clk);
    check(q == 8'hA5, "hold");
    // random polynomials, step by step
    for (int n = 0; n < 4; n++) begin
      poly = 8'($urandom); seed = 8'($urandom) | 8'h01;
      ld = 1; @(negedge clk); ld = 0; exp_q = seed;
      en = 1;
      for (int k = 0; k < 40; k++) begin
        @(negedge clk); exp_q = model(exp_q, poly);
        check(q == exp_q, $sformatf("poly %h step %0d q=%h exp %h", poly, k, q, exp_q));
      end
      en = 0;
    end
    // maximal length
    poly = 8'h1D; seed = 8'h01; ld = 1; @(negedge clk); ld = 0; first = q; en = 1;
    period = 0;
    do begin @(negedge clk); period++; end while (q != first && period < 400);
    en = 0;
    check(period == 255, $sformatf("period %0d", period));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_rescom_pkg: checks the shared package on its own. It compares
// sat_fix against an independent clamp for edge values and random 32-bit
// inputs, and checks the format constants (FIX_ONE is 1.0 with 12
// fraction bits) and the mode code points the rest of the design uses.
// A clock only drives the watchdog; the checks themselves are untimed.
`timescale 1ns/1ps
module tb_rescom_pkg;
  import rescom_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int clamp(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  task automatic try(input int v);
    fix_t got;
    got = sat_fix(v);
    check(int'(got) == clamp(v), $sformatf("sat_fix(%0d) = %0d", v, got));
  endtask

  initial begin
    int edges [12];
    edges = '{0, 1, -1, 32767, 32768, -32768, -32769, 65535, -65536,
              2147483647, -2147483647 - 1, 4096};
    foreach (edges[i]) try(edges[i]);
    for (int i = 0; i < 2000; i++) try($urandom);
    for (int i = 0; i < 2000; i++) try(int'($urandom_range(131071)) - 65536);
    check(int'(FIX_ONE) == 4096, "FIX_ONE");
    check(DATA_W == 16 && FRAC_W == 12 && RND_W == 8 && PIXEL_W == 8, "widths");
    check(MODE_IF == 2'd0 && MODE_LIF == 2'd1 && MODE_SYN == 2'd2 && MODE_RSV == 2'd3,
          "mode code points");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

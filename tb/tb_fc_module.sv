// tb_fc_module: writes random weights into the FC registers, applies
// random spike vectors and checks the spike-gated sum, including positive
// and negative saturation and a register rewrite.
`timescale 1ns/1ps
module tb_fc_module;
  import rescom_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0, we = 0;
  logic [4:0] widx = '0; fix_t wdata = '0, syn_weight;
  logic [N-1:0] spikes = '0;
  always #5 clk = ~clk;
  fc_module #(.N_IN(N)) dut (.*);

  int checks = 0, failures = 0;
  int w [N];
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic load(input int lo, input int hi);
    for (int i = 0; i < N; i++) begin
      w[i] = lo + int'($urandom_range(hi - lo));
      @(negedge clk); we = 1; widx = 5'(i); wdata = fix_t'(w[i]);
    end
    @(negedge clk); we = 0;
  endtask
  task automatic trial();
    longint acc = 0; int e;
    spikes = N'({$urandom, $urandom});
    #1;
    for (int i = 0; i < N; i++) if (spikes[i]) acc += w[i];
    e = (acc > 32767) ? 32767 : (acc < -32768) ? -32768 : int'(acc);
    check(int'(syn_weight) == e, $sformatf("sum %0d exp %0d", syn_weight, e));
    @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    load(-2000, 2000);  repeat (50) trial();
    spikes = '1; #1; begin longint a = 0; foreach (w[i]) a += w[i]; check(int'(syn_weight) == int'(a), "all spikes"); end
    spikes = '0; #1; check(syn_weight == 0, "no spikes");
    load(3000, 20000);  repeat (20) trial();
    load(-20000, -3000); repeat (20) trial();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_output_interface: accumulates random output spike vectors and checks
// the counters, the argmax class (lowest index on a tie), clear, and
// counter saturation.
`timescale 1ns/1ps
module tb_output_interface;
  localparam int N = 10;
  logic clk = 0, rst_n = 0, clear = 0, acc = 0;
  logic [N-1:0] spikes = '0; logic [7:0] counts [N]; logic [3:0] class_id;
  always #5 clk = ~clk;
  output_interface #(.N_OUT(N), .COUNT_W(8)) dut (.*);

  int checks = 0, failures = 0;
  int c [N];
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic verify();
    int best = 0;
    for (int i = 1; i < N; i++) if (c[i] > c[best]) best = i;
    for (int i = 0; i < N; i++) check(int'(counts[i]) == c[i], $sformatf("count %0d", i));
    check(int'(class_id) == best, $sformatf("class %0d exp %0d", class_id, best));
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int img = 0; img < 20; img++) begin
      clear = 1; @(negedge clk); clear = 0;
      foreach (c[i]) c[i] = 0;
      verify();
      for (int t = 0; t < 10; t++) begin
        spikes = N'($urandom) & N'($urandom);
        acc = ($urandom_range(4) != 0);
        @(negedge clk);
        if (acc) for (int i = 0; i < N; i++) c[i] += spikes[i];
        acc = 0;
        verify();
      end
    end
    // saturation
    clear = 1; @(negedge clk); clear = 0; foreach (c[i]) c[i] = 0;
    spikes = 10'b0000000100; acc = 1;
    repeat (300) @(negedge clk);
    acc = 0; c[2] = 255; verify();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_load_controller: plays the ROM controller's part (ld_w after a
// number of load cycles, co_neuron some cycles later, process_completed on
// the last neuron) and checks the controller's phase outputs cycle by
// cycle: ld_param on start_param, ld_valid/inc_weight_addr during loading,
// a single ld_completed after ld_w, waiting in evaluation, done at the end,
// and that start is ignored while busy.
`timescale 1ns/1ps
module tb_load_controller;
  logic clk = 0, rst_n = 0, start_param = 0, start = 0;
  logic ld_w = 0, co_neuron = 0, process_completed = 0;
  logic ld_param, ld_valid, inc_weight_addr, ld_completed, busy, done;
  always #5 clk = ~clk;
  load_controller dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    check(!busy && !ld_valid, "idle after reset");
    start_param = 1; @(negedge clk); start_param = 0;
    check(ld_param && busy, "ld_param");
    @(negedge clk); check(!ld_param && !busy, "back to idle");
    start = 1; @(negedge clk); start = 0;
    for (int nrn = 0; nrn < 3; nrn++) begin
      int nload = 5 + nrn, neval = 3 + nrn;
      for (int k = 0; k < nload; k++) begin
        check(ld_valid && inc_weight_addr && !ld_completed, $sformatf("load n%0d k%0d", nrn, k));
        if (k == 1) start = 1;   // ignored while busy
        ld_w = (k == nload - 1);
        @(negedge clk); start = 0; ld_w = 0;
      end
      check(ld_completed && !ld_valid, "ld_completed");
      @(negedge clk);
      for (int k = 0; k < neval; k++) begin
        check(!ld_valid && !ld_completed && busy && !done, "evaluating");
        co_neuron = (k == neval - 1); process_completed = co_neuron && (nrn == 2);
        @(negedge clk); co_neuron = 0; process_completed = 0;
      end
    end
    check(done && busy, "done");
    @(negedge clk); check(!busy && !done, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

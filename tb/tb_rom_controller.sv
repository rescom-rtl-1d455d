// tb_rom_controller: drives the load phase (ld_valid/inc_weight_addr for
// N_IN cycles) and ld_complete for each neuron of a small layer, and checks
// the BRAM addresses {neuron, weight}, ld_w on the last address, the
// delayed register writes, mul_clr, exactly 2^len_log2 sht cycles with co
// on the last, the update strobe with the neuron index, co_neuron and
// process_completed, for several stream lengths.
`timescale 1ns/1ps
module tb_rom_controller;
  localparam int NI = 8, NN = 3;
  logic clk = 0, rst_n = 0, ld_weight = 0, ld_valid = 0, inc_weight_addr = 0, ld_complete = 0;
  logic [4:0] len_log2 = 5'd2;
  logic [4:0] rom_address; logic rom_rd, reg_we; logic [2:0] reg_idx;
  logic ld_w, mul_clr, sht, co, upd; logic [1:0] ld_w_neuron_out; logic co_neuron, process_completed;
  always #5 clk = ~clk;
  rom_controller #(.N_IN(NI), .N_NEUR(NN), .MAX_LEN(16)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int pass = 0; pass < 3; pass++) begin
      len_log2 = 5'(pass * 2);  // 1, 4, 16
      ld_weight = 1; @(negedge clk); ld_weight = 0;
      for (int n = 0; n < NN; n++) begin
        int shts;
        shts = 0;
        for (int k = 0; k < NI; k++) begin
          ld_valid = 1; inc_weight_addr = 1; #1;
          check(rom_address == 5'((n << 3) | k) && rom_rd, $sformatf("addr n%0d k%0d = %h", n, k, rom_address));
          check(ld_w == (k == NI - 1), "ld_w");
          check(mul_clr == (k == 0), "mul_clr");
          if (k > 0) check(reg_we && reg_idx == 3'(k - 1), "reg write");
          @(negedge clk);
        end
        ld_valid = 0; inc_weight_addr = 0; ld_complete = 1; #1;
        check(reg_we && reg_idx == 3'(NI - 1), "last reg write");
        while (!upd) begin
          if (sht) shts++;
          check(co == (sht && shts == (1 << len_log2)), "co on last shift");
          @(negedge clk); ld_complete = 0; #1;
          check(shts <= 16, "stream too long");
          if (shts > 16) break;
        end
        check(shts == (1 << len_log2), $sformatf("shts %0d len %0d", shts, 1 << len_log2));
        check(!sht, "no shift in update cycle");
        check(ld_w_neuron_out == 2'(n) && co_neuron, "update neuron index");
        check(process_completed == (n == NN - 1), "process_completed");
        @(negedge clk);
      end
      check(ld_w_neuron_out == 0, "neuron index wraps");
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

// tb_rescom_full: the accelerator at its default (paper) size — 256 inputs,
// 256 hidden and 10 output neurons, stream length 16 — classifying one
// random 16x16 image in LIF mode over 10 time steps, as in the paper's
// main configuration (threshold 1.0, membrane decay 0.98, synaptic decay
// 0.9). All 68,096 weights are random and written through the host port.
// The spike counts and the class are compared with the bit-exact reference
// model, and the latency with 2 + 10*(256 + 266*273 + 7) = 728,812 clocks,
// i.e. 7.29 ms at 100 MHz.
`timescale 1ns/1ps
module tb_rescom_full;
  import rescom_pkg::*;
  import rescom_model_pkg::*;

  localparam int NI = 256, NH = 256, NO = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pix_we = 0; logic [7:0] pix_addr = '0; logic [7:0] pix_data = '0;
  logic w_we = 0, w_layer = 0; logic [15:0] w_addr = '0; fix_t w_data = '0;
  logic lfsr_ld = 0; rnd_t lfsr_poly [3]; rnd_t lfsr_seed [3];
  mode_e mode = MODE_LIF; fix_t thr = FIX_ONE;
  rnd_t alpha = 8'd250;   // 0.98 * 255
  rnd_t beta  = 8'd230;   // 0.9 * 255
  logic [4:0] len_log2 = 5'd4; logic [7:0] num_steps = 8'd10;
  logic start = 0, busy, done; logic [3:0] class_id; logic [7:0] counts [NO];

  rescom_top dut (.*);

  int checks = 0, failures = 0;
  net_model mdl;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int cyc, exp_cyc;
    mdl = new(NI, NH, NO);
    lfsr_poly[0] = 8'h1D; lfsr_poly[1] = 8'h2B; lfsr_poly[2] = 8'h2D;
    lfsr_seed[0] = 8'h5A; lfsr_seed[1] = 8'hC3; lfsr_seed[2] = 8'h17;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); lfsr_ld = 1; @(negedge clk); lfsr_ld = 0;
    mdl.load_lfsr(lfsr_poly, lfsr_seed);
    for (int j = 0; j < NH; j++) for (int k = 0; k < NI; k++) begin
      mdl.w1[j][k] = int'($urandom_range(1420)) - 700;
      @(negedge clk); w_we = 1; w_layer = 0; w_addr = 16'((j << 8) | k); w_data = fix_t'(mdl.w1[j][k]);
    end
    for (int j = 0; j < NO; j++) for (int k = 0; k < NH; k++) begin
      mdl.w2[j][k] = int'($urandom_range(2000)) - 900;
      @(negedge clk); w_we = 1; w_layer = 1; w_addr = 16'((j << 8) | k); w_data = fix_t'(mdl.w2[j][k]);
    end
    @(negedge clk); w_we = 0;
    for (int k = 0; k < NI; k++) begin
      mdl.pix[k] = $urandom_range(255);
      @(negedge clk); pix_we = 1; pix_addr = 8'(k); pix_data = 8'(mdl.pix[k]);
    end
    @(negedge clk); pix_we = 0;
    mdl.mode = 1; mdl.len_log2 = 4; mdl.thr = int'(thr); mdl.alpha = alpha; mdl.beta = beta;
    mdl.run_image(10);
    @(negedge clk); start = 1; @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    exp_cyc = 2 + 10 * (NI + NH * (NI + 17) + NO * (NH + 17) + 7);
    check(cyc == exp_cyc, $sformatf("latency %0d expected %0d", cyc, exp_cyc));
    for (int j = 0; j < NO; j++)
      check(counts[j] == 8'(mdl.counts[j]), $sformatf("count[%0d]=%0d expected %0d", j, counts[j], mdl.counts[j]));
    check(int'(class_id) == mdl.class_id(), "class");
    check(mdl.hid_spike_total > 0 && mdl.out_spike_total > 0, "network spiked");
    $display("latency %0d cycles (%0.3f ms at 100 MHz), hidden spikes %0d, output spikes %0d, class %0d",
             cyc, cyc / 100000.0, mdl.hid_spike_total, mdl.out_spike_total, class_id);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

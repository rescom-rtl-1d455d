// tb_input_interface: loads random pixels (and the extremes 0 and 255),
// encodes many time steps and checks every spike against pixel >= rnd with
// an independent LFSR model, the N_IN-cycle latency, and that the firing
// rate over the steps follows the pixel intensity.
`timescale 1ns/1ps
module tb_input_interface;
  import rescom_pkg::*;
  import rescom_model_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pix_we = 0; logic [4:0] pix_addr = '0; logic [7:0] pix_data = '0;
  logic lfsr_ld = 0; rnd_t lfsr_poly = 8'h1D, lfsr_seed = 8'h6B;
  logic start = 0, busy, done; logic [N-1:0] spikes;
  input_interface #(.N_IN(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int pix [N];
  int rate [N];
  initial begin
    logic [7:0] q;
    repeat (2) @(negedge clk); rst_n = 1;
    lfsr_ld = 1; @(negedge clk); lfsr_ld = 0; q = lfsr_seed;
    for (int k = 0; k < N; k++) begin
      pix[k] = (k == 0) ? 0 : (k == 1) ? 255 : (k * 8);
      @(negedge clk); pix_we = 1; pix_addr = 5'(k); pix_data = 8'(pix[k]);
    end
    @(negedge clk); pix_we = 0;
    for (int t = 0; t < 255; t++) begin
      int cyc, e;
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc == N + 1, $sformatf("latency %0d", cyc));
      for (int k = 0; k < N; k++) begin
        e = (pix[k] >= int'(q)); q = lfsr_next(q, lfsr_poly);
        check(spikes[k] == e[0], $sformatf("t %0d pixel %0d", t, k));
        rate[k] += spikes[k];
      end
    end
    check(rate[0] == 0 && rate[1] == 255, "extreme pixels");
    // over a full LFSR period the rate is exactly the pixel value
    for (int k = 2; k < N; k++) check(rate[k] == pix[k], $sformatf("rate %0d pixel %0d", rate[k], pix[k]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

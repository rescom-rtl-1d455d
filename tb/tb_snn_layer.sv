// tb_snn_layer: one layer of 12 inputs and 5 neurons. The test bench
// plays two LFSRs on rnd_state/rnd_const (stepping them whenever the layer
// asks with rnd_en), loads random weights into the layer's BRAM, and runs
// time steps in every mode and several stream lengths. After each step the
// output spikes are compared with the reference model and the pass latency
// with N_NEUR*(N_IN+2^len_log2+1)+1 cycles from the start cycle to the done cycle.
`timescale 1ns/1ps
module tb_snn_layer;
  import rescom_pkg::*;
  import rescom_model_pkg::*;
  localparam int NI = 12, NN = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mode_e mode = MODE_IF; fix_t thr = FIX_ONE; rnd_t alpha = 8'd250, beta = 8'd230;
  logic [4:0] len_log2 = 5'd4; logic start_param = 0, start = 0;
  logic [NI-1:0] in_spikes = '0; logic [NN-1:0] out_spikes; logic busy, done;
  rnd_t rnd_state, rnd_const; logic rnd_en;
  logic w_wr_en = 0; logic [6:0] w_wr_addr = '0; fix_t w_wr_data = '0;

  snn_layer #(.N_IN(NI), .N_NEUR(NN), .MAX_LEN(16)) dut (.*);

  logic [7:0] ps = 8'h2B, pc = 8'h2D;
  always_ff @(posedge clk) if (rnd_en) begin
    rnd_state <= lfsr_next(rnd_state, ps);
    rnd_const <= lfsr_next(rnd_const, pc);
  end

  int checks = 0, failures = 0, fires = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  net_model mdl;
  int v[], it[];

  initial begin
    mdl = new(NI, NN, 1);
    v = new[NN]; it = new[NN];
    mdl.poly[1] = ps; mdl.poly[2] = pc;
    rnd_state = 8'h33; rnd_const = 8'h9C;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int j = 0; j < NN; j++) for (int k = 0; k < NI; k++) begin
      mdl.w1[j][k] = $urandom_range(3500) - 1200;
      @(negedge clk); w_wr_en = 1; w_wr_addr = 7'((j << 4) | k); w_wr_data = fix_t'(mdl.w1[j][k]);
    end
    @(negedge clk); w_wr_en = 0;
    for (int run = 0; run < 6; run++) begin
      mode = mode_e'(run % 3); len_log2 = 5'((run < 3) ? 4 : 2);
      mdl.mode = run % 3; mdl.len_log2 = int'(len_log2); mdl.thr = int'(thr);
      mdl.alpha = alpha; mdl.beta = beta;
      start_param = 1; @(negedge clk); start_param = 0; @(negedge clk);
      foreach (v[j]) begin v[j] = 0; it[j] = 0; end
      for (int t = 0; t < 5; t++) begin
        int sin[], sout[], cyc;
        sin = new[NI];
        in_spikes = NI'($urandom);
        foreach (sin[k]) sin[k] = in_spikes[k];
        mdl.q[1] = rnd_state; mdl.q[2] = rnd_const;
        mdl.layer(sin, mdl.w1, v, it, sout, NI, NN);
        start = 1; @(negedge clk); start = 0; cyc = 1;
        in_spikes = '0;   // latched by the layer
        while (!done) begin @(negedge clk); cyc++; end
        check(cyc == NN * (NI + (1 << len_log2) + 1) + 1, $sformatf("latency %0d", cyc));
        for (int j = 0; j < NN; j++) begin
          check(out_spikes[j] == sout[j][0], $sformatf("run %0d t %0d neuron %0d spike %0b exp %0d", run, t, j, out_spikes[j], sout[j]));
          fires += sout[j];
        end
        @(negedge clk);
      end
    end
    check(fires > 10, $sformatf("spikes happened (%0d)", fires));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_rescom_top: end-to-end test of the accelerator at reduced sizes
// (16 inputs, 8 hidden, 4 output neurons). Random weights and pixels are
// loaded through the host ports, images are run in every neuron mode and
// with two stream lengths, and the spike counts, the class and the latency
// of each image are compared with the bit-exact reference model. It also
// counts how often each mechanism happened (modes, stream lengths, hidden
// and output spikes, resets, FC-sum saturation, LFSR reload, start ignored
// while busy) and fails if one never did.
`timescale 1ns/1ps
module tb_rescom_top;
  import rescom_pkg::*;
  import rescom_model_pkg::*;

  localparam int NI = 16, NH = 8, NO = 4, ML = 16;
  localparam int IN_W = $clog2(NI), HID_W = $clog2(NH), OUT_W = $clog2(NO);
  localparam int LEN_LW = $clog2(ML) + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pix_we = 0; logic [IN_W-1:0] pix_addr = '0; logic [7:0] pix_data = '0;
  logic w_we = 0, w_layer = 0; logic [HID_W+IN_W-1:0] w_addr = '0; fix_t w_data = '0;
  logic lfsr_ld = 0; rnd_t lfsr_poly [3]; rnd_t lfsr_seed [3];
  mode_e mode = MODE_IF; fix_t thr = FIX_ONE; rnd_t alpha = 8'd250, beta = 8'd230;
  logic [LEN_LW-1:0] len_log2 = 4; logic [7:0] num_steps = 8'd4;
  logic start = 0, busy, done; logic [OUT_W-1:0] class_id; logic [7:0] counts [NO];

  rescom_top #(.N_IN(NI), .N_HID(NH), .N_OUT(NO), .MAX_LEN(ML)) dut (.*);

  int checks = 0, failures = 0;
  int m_mode[4], m_len16 = 0, m_len4 = 0, m_hid = 0, m_out = 0, m_sat = 0, m_reload = 0, m_ignored = 0;
  net_model mdl;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write_weights(input int lo, input int hi);
    for (int j = 0; j < NH; j++) for (int k = 0; k < NI; k++) begin
      int w = lo + int'($urandom_range(hi - lo));
      mdl.w1[j][k] = w;
      @(negedge clk); w_we = 1; w_layer = 0; w_addr = (j << IN_W) | k; w_data = fix_t'(w);
    end
    for (int j = 0; j < NO; j++) for (int k = 0; k < NH; k++) begin
      int w = lo + int'($urandom_range(hi - lo));
      mdl.w2[j][k] = w;
      @(negedge clk); w_we = 1; w_layer = 1; w_addr = (j << HID_W) | k; w_data = fix_t'(w);
    end
    @(negedge clk); w_we = 0;
  endtask

  task automatic write_pixels();
    for (int k = 0; k < NI; k++) begin
      int p = $urandom_range(255);
      mdl.pix[k] = p;
      @(negedge clk); pix_we = 1; pix_addr = k[IN_W-1:0]; pix_data = p[7:0];
    end
    @(negedge clk); pix_we = 0;
  endtask

  task automatic reload_lfsr();
    @(negedge clk); lfsr_ld = 1; @(negedge clk); lfsr_ld = 0;
    mdl.load_lfsr(lfsr_poly, lfsr_seed);
    m_reload++;
  endtask

  task automatic run_image(input mode_e md, input int ll, input int steps);
    int cyc = 0, exp_cyc, hs0, os0, sat0;
    mode = md; len_log2 = LEN_LW'(ll); num_steps = 8'(steps);
    mdl.mode = int'(md); mdl.len_log2 = ll; mdl.thr = int'(thr);
    mdl.alpha = alpha; mdl.beta = beta;
    hs0 = mdl.hid_spike_total; os0 = mdl.out_spike_total; sat0 = mdl.sat_events;
    mdl.run_image(steps);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    // a second start while busy must be ignored
    repeat (3) @(negedge clk);
    start = 1; @(negedge clk); start = 0; cyc = 5;
    if (busy) m_ignored++;
    while (!done) begin @(negedge clk); cyc++; end
    exp_cyc = 2 + steps * (NI + NH * (NI + (1 << ll) + 1) + NO * (NH + (1 << ll) + 1) + 7);
    check(cyc == exp_cyc, $sformatf("latency %0d expected %0d", cyc, exp_cyc));
    for (int j = 0; j < NO; j++)
      check(counts[j] == 8'(mdl.counts[j]),
            $sformatf("mode %0d len %0d count[%0d]=%0d expected %0d", md, ll, j, counts[j], mdl.counts[j]));
    check(int'(class_id) == mdl.class_id(), $sformatf("class %0d expected %0d", class_id, mdl.class_id()));
    m_mode[int'(md)]++;
    if (ll == 4) m_len16++;
    if (ll == 2) m_len4++;
    if (mdl.hid_spike_total > hs0) m_hid++;
    if (mdl.out_spike_total > os0) m_out++;
    if (mdl.sat_events > sat0) m_sat++;
  endtask

  initial begin
    mdl = new(NI, NH, NO);
    lfsr_poly[0] = 8'h1D; lfsr_poly[1] = 8'h2B; lfsr_poly[2] = 8'h2D;
    lfsr_seed[0] = 8'h5A; lfsr_seed[1] = 8'hC3; lfsr_seed[2] = 8'h17;
    repeat (3) @(negedge clk); rst_n = 1;
    reload_lfsr();
    write_weights(-1500, 3000);
    write_pixels();
    run_image(MODE_IF, 4, 4);
    run_image(MODE_LIF, 4, 4);
    run_image(MODE_SYN, 4, 4);
    run_image(MODE_LIF, 2, 3);
    lfsr_seed[1] = 8'h81;
    reload_lfsr();
    write_pixels();
    run_image(MODE_SYN, 2, 3);
    run_image(MODE_RSV, 4, 2);
    // large weights: the FC sum saturates
    write_weights(6000, 12000);
    run_image(MODE_IF, 4, 2);
    for (int m = 0; m < 4; m++) check(m_mode[m] > 0, $sformatf("mode %0d never ran", m));
    check(m_len16 > 0 && m_len4 > 0, "both stream lengths");
    check(m_hid > 0, "hidden spikes happened");
    check(m_out > 0, "output spikes happened");
    check(m_sat > 0, "FC saturation happened");
    check(m_reload > 1, "LFSR reload happened");
    check(m_ignored > 0, "start while busy happened");
    $display("mechanisms: IF=%0d LIF=%0d SYN=%0d RSV=%0d len16=%0d len4=%0d hid_spk_images=%0d out_spk_images=%0d sat_images=%0d reloads=%0d ignored_starts=%0d",
             m_mode[0], m_mode[1], m_mode[2], m_mode[3], m_len16, m_len4, m_hid, m_out, m_sat, m_reload, m_ignored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

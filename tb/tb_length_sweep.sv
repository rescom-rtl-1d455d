// tb_length_sweep: the stream-length sweep (lengths 16 to 1024) in the IF,
// LIF and Synaptic modes, on a reduced 16-8-4 network built with
// MAX_LEN = 1024. For every mode and length one image of two time steps
// is classified and the spike counts, the class and the latency are
// compared with the reference model. A stand-alone stochastic multiplier
// measures, for each length, the mean absolute error of x*a over random
// operands against the exact product; the error must shrink from length
// 16 to length 1024, as the resolution 2/L predicts.
`timescale 1ns/1ps
module tb_length_sweep;
  import rescom_pkg::*;
  import rescom_model_pkg::*;

  localparam int NI = 16, NH = 8, NO = 4, ML = 1024;
  localparam int IN_W = $clog2(NI), HID_W = $clog2(NH), OUT_W = $clog2(NO);
  localparam int LEN_LW = $clog2(ML) + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pix_we = 0; logic [IN_W-1:0] pix_addr = '0; logic [7:0] pix_data = '0;
  logic w_we = 0, w_layer = 0; logic [HID_W+IN_W-1:0] w_addr = '0; fix_t w_data = '0;
  logic lfsr_ld = 0; rnd_t lfsr_poly [3]; rnd_t lfsr_seed [3];
  mode_e mode = MODE_IF; fix_t thr = FIX_ONE; rnd_t alpha = 8'd250, beta = 8'd230;
  logic [LEN_LW-1:0] len_log2 = 4; logic [7:0] num_steps = 8'd2;
  logic start = 0, busy, done; logic [OUT_W-1:0] class_id; logic [7:0] counts [NO];

  rescom_top #(.N_IN(NI), .N_HID(NH), .N_OUT(NO), .MAX_LEN(ML)) dut (.*);

  // stand-alone multiplier for the error measurement
  logic m_clr = 0, m_sht = 0; fix_t m_x = '0, m_prod; rnd_t m_rnd = 8'd1;
  logic [ML-1:0] m_other = '0; logic [LEN_LW-1:0] m_len = '0;
  sc_multiplier #(.MAX_LEN(ML)) u_mul (
    .clk, .rst_n, .clr(m_clr), .sht(m_sht), .x(m_x), .rnd(m_rnd), .other_sr(m_other),
    .len_log2(m_len), .prod(m_prod)
  );

  int checks = 0, failures = 0;
  net_model mdl;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    real err [11];
    mdl = new(NI, NH, NO);
    lfsr_poly[0] = 8'h1D; lfsr_poly[1] = 8'h2B; lfsr_poly[2] = 8'h2D;
    lfsr_seed[0] = 8'h5A; lfsr_seed[1] = 8'hC3; lfsr_seed[2] = 8'h17;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); lfsr_ld = 1; @(negedge clk); lfsr_ld = 0;
    mdl.load_lfsr(lfsr_poly, lfsr_seed);
    for (int j = 0; j < NH; j++) for (int k = 0; k < NI; k++) begin
      mdl.w1[j][k] = int'($urandom_range(4500)) - 1500;
      @(negedge clk); w_we = 1; w_layer = 0; w_addr = 7'((j << IN_W) | k); w_data = fix_t'(mdl.w1[j][k]);
    end
    for (int j = 0; j < NO; j++) for (int k = 0; k < NH; k++) begin
      mdl.w2[j][k] = int'($urandom_range(4500)) - 1500;
      @(negedge clk); w_we = 1; w_layer = 1; w_addr = 7'((j << HID_W) | k); w_data = fix_t'(mdl.w2[j][k]);
    end
    @(negedge clk); w_we = 0;
    for (int k = 0; k < NI; k++) begin
      mdl.pix[k] = $urandom_range(255);
      @(negedge clk); pix_we = 1; pix_addr = IN_W'(k); pix_data = 8'(mdl.pix[k]);
    end
    @(negedge clk); pix_we = 0;

    for (int md = 0; md < 3; md++) begin
      for (int ll = 4; ll <= 10; ll++) begin
        int cyc, exp_cyc;
        mode = mode_e'(md); len_log2 = LEN_LW'(ll);
        mdl.mode = md; mdl.len_log2 = ll; mdl.thr = int'(thr); mdl.alpha = alpha; mdl.beta = beta;
        mdl.run_image(2);
        @(negedge clk); start = 1; @(negedge clk); start = 0; cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
        exp_cyc = 2 + 2 * (NI + NH * (NI + (1 << ll) + 1) + NO * (NH + (1 << ll) + 1) + 7);
        check(cyc == exp_cyc, $sformatf("latency %0d expected %0d", cyc, exp_cyc));
        for (int j = 0; j < NO; j++)
          check(counts[j] == 8'(mdl.counts[j]),
                $sformatf("mode %0d L %0d count[%0d]=%0d expected %0d", md, 1 << ll, j, counts[j], mdl.counts[j]));
        check(int'(class_id) == mdl.class_id(), "class");
      end
    end

    // multiplication error against stream length
    for (int ll = 4; ll <= 10; ll++) begin
      real sum_err, exact;
      int xi, a;
      sum_err = 0.0;
      for (int n = 0; n < 40; n++) begin
        xi = int'($urandom_range(8000));
        a  = int'($urandom_range(255));
        m_x = fix_t'(xi); m_len = LEN_LW'(ll);
        @(negedge clk); m_clr = 1; @(negedge clk); m_clr = 0;
        for (int k = 0; k < ML; k++) m_other[k] = (a >= int'($urandom_range(255, 1)));
        for (int k = 0; k < (1 << ll); k++) begin
          m_rnd = 8'($urandom_range(255, 1)); m_sht = 1; @(negedge clk);
        end
        m_sht = 0;
        // only the low 2^ll factor bits meet stream bits
        exact = (xi / 4096.0) * (a / 255.0);
        sum_err += ((m_prod / 4096.0) > exact) ? (m_prod / 4096.0) - exact : exact - (m_prod / 4096.0);
      end
      err[ll] = sum_err / 40.0;
      $display("stream length %0d: mean |error| of x*a = %0.4f", 1 << ll, err[ll]);
    end
    check(err[10] < err[4], "error shrinks with stream length");
    check(err[10] < 0.03, $sformatf("error at length 1024 is %0.4f", err[10]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

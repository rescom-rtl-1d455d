// tb_neuron: runs the reconfigurable neuron in every mode with random
// synaptic inputs, random factor streams and random stream numbers, and
// compares v_mem, I_t and the spike after each update with a model of
// the three update equations, the threshold test and the reset by
// subtraction. Also checks that the state holds without `valid` and that
// `init` clears it.
`timescale 1ns/1ps
module tb_neuron;
  import rescom_pkg::*;
  logic clk = 0, rst_n = 0, init = 0, clr = 0, sht = 0, valid = 0;
  mode_e mode = MODE_IF; fix_t thr = FIX_ONE, syn_weight = '0;
  logic [4:0] len_log2 = 5'd4; rnd_t rnd = 8'd1;
  logic [15:0] alpha_sr = '0, beta_sr = '0;
  logic spike; fix_t v_mem, i_t;
  always #5 clk = ~clk;
  neuron #(.MAX_LEN(16)) dut (.*);

  int checks = 0, failures = 0, fires = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic int sat(input int v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
  endfunction
  function automatic int opof(input int x);
    int m = (x < 0) ? -x : x; if (m > 8191) m = 8191; return m >> 5;
  endfunction

  int mv = 0, mi = 0;
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    init = 1; @(negedge clk); init = 0;
    for (int n = 0; n < 400; n++) begin
      int len, ll, a_ones, b_ones, opv, opi, syn, av, bi, inext, vsel, f;
      mode = mode_e'(n % 4 == 3 ? (n % 16 == 3 ? 3 : n % 3) : n % 3);
      ll = $urandom_range(4); len = 1 << ll; len_log2 = 5'(ll);
      syn = $urandom_range(5000) - 1500; syn_weight = fix_t'(syn);
      opv = opof(mv); opi = opof(mi);
      clr = 1; @(negedge clk); clr = 0;
      a_ones = 0; b_ones = 0;
      alpha_sr = 16'($urandom); beta_sr = 16'($urandom);
      for (int k = 0; k < len; k++) begin
        rnd = 8'($urandom_range(255, 1)); sht = 1;
        if (opv >= int'(rnd) && alpha_sr[len-1-k]) a_ones++;
        if (opi >= int'(rnd) && beta_sr[len-1-k]) b_ones++;
        @(negedge clk);
      end
      sht = 0;
      // a few idle cycles: nothing may change
      repeat (2) @(negedge clk);
      check(int'(v_mem) == mv && int'(i_t) == mi, "hold without valid");
      av = (a_ones * 8192) / len; if (mv < 0) av = -av;
      bi = (b_ones * 8192) / len; if (mi < 0) bi = -bi;
      inext = sat(bi + syn);
      case (int'(mode))
        0: vsel = sat(mv + syn);
        1: vsel = sat(av + syn);
        2: vsel = sat(av + inext);
        default: vsel = mv;
      endcase
      f = (int'(mode) != 3) && (vsel > int'(thr));
      valid = 1; @(negedge clk); valid = 0;
      mv = f ? sat(vsel - int'(thr)) : vsel;
      mi = (int'(mode) == 2) ? inext : (int'(mode) == 3) ? mi : 0;
      fires += f;
      check(int'(v_mem) == mv, $sformatf("n=%0d mode=%0d v=%0d exp %0d", n, mode, v_mem, mv));
      check(int'(i_t) == mi, $sformatf("n=%0d mode=%0d i=%0d exp %0d", n, mode, i_t, mi));
      check(spike == f[0], $sformatf("n=%0d spike", n));
    end
    check(fires > 20, $sformatf("spikes happened (%0d)", fires));
    init = 1; @(negedge clk); init = 0;
    check(v_mem == 0 && i_t == 0 && !spike, "init clears state");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_sc_multiplier: for random signed states, random factor streams and
// every stream length 1..16, runs clr + 2^len_log2 shifts and compares the
// product with a model that forms the streams, ANDs and counts them.
// Also checks the statistical accuracy with an LFSR-like uniform source:
// the mean error of x*a over many trials stays small.
`timescale 1ns/1ps
module tb_sc_multiplier;
  import rescom_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, sht = 0;
  fix_t x = '0, prod; rnd_t rnd = 8'd1;
  logic [15:0] other_sr = '0; logic [4:0] len_log2 = 5'd4;
  always #5 clk = ~clk;
  sc_multiplier #(.MAX_LEN(16)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int xi, m, op, ones, expv, len;
    int xs [6] = '{0, 4096, -4096, 8191, -20000, 30000};
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      int ll = n % 5;
      len = 1 << ll; len_log2 = 5'(ll);
      xi = (n < 6) ? xs[n] : $urandom_range(65535) - 32768;
      x = fix_t'(xi);
      other_sr = 16'($urandom);
      m = (xi < 0) ? -xi : xi; if (m > 8191) m = 8191; op = m >> 5;
      clr = 1; @(negedge clk); clr = 0;
      ones = 0;
      for (int k = 0; k < len; k++) begin
        rnd = 8'($urandom_range(255, 1)); sht = 1;
        // stream bit k lands at sr position len-1-k after len shifts
        if (op >= int'(rnd) && other_sr[len-1-k]) ones++;
        @(negedge clk);
      end
      sht = 0;
      // bits of other_sr above len see zeros in x's stream
      expv = (ones * 8192) / len; if (xi < 0) expv = -expv;
      check(int'(prod) == expv, $sformatf("x=%0d len=%0d prod=%0d exp=%0d", xi, len, prod, expv));
    end
    // accuracy: x = 0.75 (3072) times a = 0.5 stream with random bits, len 16
    begin
      longint sum = 0;
      for (int n = 0; n < 200; n++) begin
        x = fix_t'(3072); len_log2 = 5'd4;
        clr = 1; @(negedge clk); clr = 0;
        other_sr = 16'($urandom);
        for (int k = 0; k < 16; k++) begin
          rnd = 8'($urandom_range(255, 1)); sht = 1; @(negedge clk);
        end
        sht = 0; sum += prod;
      end
      // expected 0.75 * 0.5 = 0.375 -> 1536
      check((sum / 200) > 1400 && (sum / 200) < 1680, $sformatf("mean product %0d", sum / 200));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

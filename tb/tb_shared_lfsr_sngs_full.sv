// Full-size testbench of shared_lfsr_sngs at its default parameters: an
// 8-bit LFSR shared by two comparator SNGs, the first wired directly and the
// second in reverse. Phase 1 feeds every value x = 0..255 to both SNGs for
// one 255-cycle period each, checks that the LFSR returns to its seed and
// that each stream holds x ones, then checks the average |SCC| between the
// two SNGs (published minimum 0.130) and the mean-squared error of an AND
// multiplier fed by the two streams (published about 0.00001). Phase 2
// gives the two SNGs different random inputs each period and checks the ones
// counts again.
module tb_shared_lfsr_sngs_full;
  import sc_tb_pkg::*;

  localparam int N = 8;
  localparam int L = (1 << N) - 1;

  int checks = 0, failures = 0;
  int n_wrap = 0, n_stall = 0;
  logic clk, rst_n, en;
  logic [1:0][N-1:0] x;
  logic [1:0] s;
  logic [N-1:0] lfsr_q;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  shared_lfsr_sngs dut (.clk, .rst_n, .en, .x, .s, .lfsr_q);

  stream_t str [2][1 << N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    real t, sccavg, mse, prod;
    int ones [2];
    logic [N-1:0] q_hold;
    logic [1:0]   s_hold;

    rst_n = 1'b0; en = 1'b0; x = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    en = 1'b1;

    // Phase 1: the same x on both SNGs, every x.
    for (int v = 0; v <= L; v++) begin
      x[0] = N'(v); x[1] = N'(v);
      str[0][v] = '0; str[1][v] = '0;
      for (int c = 0; c < L; c++) begin
        #1;
        str[0][v][c] = s[0];
        str[1][v][c] = s[1];
        if (v == 100 && c == 50) begin
          q_hold = lfsr_q; s_hold = s;
          en = 1'b0;
          repeat (4) @(posedge clk);
          #1 check(lfsr_q == q_hold && s == s_hold, "en=0 holds state and outputs");
          n_stall++;
          en = 1'b1;
        end
        @(posedge clk);
      end
      #1;
      check(lfsr_q == 8'h01, $sformatf("LFSR back at the seed after period %0d", v));
      if (lfsr_q == 8'h01) n_wrap++;
      check($countones(str[0][v]) == v, $sformatf("SNG 0, x=%0d: wrong ones count", v));
      check($countones(str[1][v]) == v, $sformatf("SNG 1, x=%0d: wrong ones count", v));
      // The reversed wiring must give a different order. Constant streams
      // (x = 0, 255) and x = 254, whose single 0 falls on r = 11111111 (its
      // own reversal), are the same on both SNGs.
      if (v > 0 && v < L - 1) check(str[0][v] != str[1][v], $sformatf("x=%0d: streams differ", v));
    end

    t = 0.0;
    for (int i = 1; i <= L; i++)
      for (int j = 1; j <= L; j++)
        t += fabs(scc(str[0][i], str[1][j], L));
    sccavg = t / (real'(L) * real'(L));
    $display("SCC_avg(SNG0, SNG1) = %.4f (published 0.130)", sccavg);
    check(fabs(sccavg - 0.130) < 0.001, "SCC_avg matches the published 0.130");

    mse = 0.0;
    for (int i = 0; i <= L; i++) begin
      for (int j = 0; j <= L; j++) begin
        prod = (real'(i) / L) * (real'(j) / L);
        t = real'($countones(str[0][i] & str[1][j])) / L - prod;
        mse += t * t;
      end
    end
    mse /= real'(L + 1) * real'(L + 1);
    $display("AND multiplier MSE over all input pairs = %.6f (published 0.00001)", mse);
    check(mse < 0.00002, "multiplier MSE below 0.00002");

    // Phase 2: independent random inputs per SNG.
    for (int p = 0; p < 64; p++) begin
      x[0] = N'($urandom_range(0, L));
      x[1] = N'($urandom_range(0, L));
      ones[0] = 0; ones[1] = 0;
      for (int c = 0; c < L; c++) begin
        #1;
        ones[0] += int'(s[0]);
        ones[1] += int'(s[1]);
        @(posedge clk);
      end
      check(ones[0] == int'(x[0]) && ones[1] == int'(x[1]),
            $sformatf("random inputs %0d, %0d: got %0d, %0d ones", x[0], x[1], ones[0], ones[1]));
    end

    $display("mechanisms: period wraps %0d, enable holds %0d", n_wrap, n_stall);
    checks += 2;
    if (n_wrap == 0)  begin failures++; $display("FAIL: no LFSR period completed"); end
    if (n_stall == 0) begin failures++; $display("FAIL: enable hold never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

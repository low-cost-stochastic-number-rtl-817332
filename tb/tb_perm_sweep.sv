// Exhaustive permutation sweep, the experiment behind the claim that the
// reversed wiring is the best partner of the direct one. A 4-bit and a 5-bit
// LFSR each drive one perm_sng per permutation (24 and 120 of them), with
// comparator PCCs, and, at 4 bits, also with WBG PCCs. Every input value is
// held for one LFSR period and all streams are recorded. Then SCC_avg
// between the direct SNG (index n!) and every other index is computed and
// the testbench checks that index 1 (full reversal) gives the minimum, that
// the direct wiring against itself gives the maximum, and that the minimum
// equals the published 0.473 (n = 4, CMP), 0.387 (n = 4, WBG) and 0.372
// (n = 5, CMP).
module tb_perm_sweep;
  import sng_pkg::*;
  import sc_tb_pkg::*;

  localparam int K4 = 24;
  localparam int K5 = 120;

  int checks = 0, failures = 0;
  logic clk, rst_n, en;
  logic [3:0] l4, x4;
  logic [4:0] l5, x5;
  logic [K4-1:0] s4c, s4w;
  logic [K5-1:0] s5c;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  lfsr #(.N(4)) u_l4 (.clk, .rst_n, .en, .q(l4));
  lfsr #(.N(5)) u_l5 (.clk, .rst_n, .en, .q(l5));

  for (genvar k = 1; k <= K4; k++) begin : g4
    perm_sng #(.N(4), .PERM_IDX(k), .PCC(PCC_CMP)) u_c (.l(l4), .x(x4), .s(s4c[k-1]));
    perm_sng #(.N(4), .PERM_IDX(k), .PCC(PCC_WBG)) u_w (.l(l4), .x(x4), .s(s4w[k-1]));
  end
  for (genvar k = 1; k <= K5; k++) begin : g5
    perm_sng #(.N(5), .PERM_IDX(k), .PCC(PCC_CMP)) u_c (.l(l5), .x(x5), .s(s5c[k-1]));
  end

  logic [14:0] st4c [K4][16];
  logic [14:0] st4w [K4][16];
  logic [30:0] st5c [K5][32];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic real avg4(input logic [14:0] a [16], input logic [14:0] b [16]);
    real t = 0.0;
    for (int i = 1; i < 16; i++)
      for (int j = 1; j < 16; j++)
        t += fabs(scc(stream_t'(a[i]), stream_t'(b[j]), 15));
    return t / 225.0;
  endfunction

  function automatic real avg5(input logic [30:0] a [32], input logic [30:0] b [32]);
    real t = 0.0;
    for (int i = 1; i < 32; i++)
      for (int j = 1; j < 32; j++)
        t += fabs(scc(stream_t'(a[i]), stream_t'(b[j]), 31));
    return t / 961.0;
  endfunction

  // Check that index 1 is the minimum and index K (the direct wiring itself)
  // the maximum of v[1..K].
  task automatic check_extremes(input real v [], input string name, input real published);
    int kmin = 1, kmax = 1;
    for (int k = 1; k < v.size(); k++) begin
      if (v[k] < v[kmin] - 1.0e-9) kmin = k;
      if (v[k] > v[kmax] + 1.0e-9) kmax = k;
    end
    $display("%s: min SCC_avg %.4f at index %0d, max %.4f at index %0d, index 1 gives %.4f",
             name, v[kmin], kmin, v[kmax], kmax, v[1]);
    check(fabs(v[1] - v[kmin]) < 1.0e-9, {name, ": index 1 gives the minimum SCC_avg"});
    check(kmax == v.size() - 1, {name, ": the direct wiring gives the maximum"});
    check(fabs(v[1] - published) < 0.001, $sformatf("%s: minimum %.4f against published %.3f", name, v[1], published));
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    real v4c [], v4w [], v5c [];
    rst_n = 1'b0; en = 1'b0; x4 = '0; x5 = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    en = 1'b1;
    for (int v = 0; v < 32; v++) begin
      x4 = 4'(v); x5 = 5'(v);
      for (int c = 0; c < 31; c++) begin
        #1;
        for (int k = 0; k < K5; k++) st5c[k][v][c] = s5c[k];
        @(posedge clk);
      end
    end
    // The 4-bit sweep, one 15-cycle period per value, starting from reset.
    rst_n = 1'b0;
    @(posedge clk);
    #1 rst_n = 1'b1;
    for (int v = 0; v < 16; v++) begin
      x4 = 4'(v);
      for (int c = 0; c < 15; c++) begin
        #1;
        for (int k = 0; k < K4; k++) begin
          st4c[k][v][c] = s4c[k];
          st4w[k][v][c] = s4w[k];
        end
        @(posedge clk);
      end
    end

    v4c = new[K4 + 1]; v4w = new[K4 + 1]; v5c = new[K5 + 1];
    for (int k = 1; k <= K4; k++) begin
      v4c[k] = avg4(st4c[K4-1], st4c[k-1]);
      v4w[k] = avg4(st4w[K4-1], st4w[k-1]);
    end
    for (int k = 1; k <= K5; k++) v5c[k] = avg5(st5c[K5-1], st5c[k-1]);
    // Index 0 is unused; give it the value of index 1 so it never wins.
    v4c[0] = v4c[1]; v4w[0] = v4w[1]; v5c[0] = v5c[1];
    check_extremes(v4c, "n=4 CMP", 0.473);
    check_extremes(v4w, "n=4 WBG", 0.387);
    check_extremes(v5c, "n=5 CMP", 0.372);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// End-to-end testbench of shared_lfsr_sngs. Sweeps every input value through
// one LFSR period on several configurations and checks stream contents, the
// LFSR period, the enable hold, the average SCC between SNGs against the
// published minimum values (two SNGs, reversed wiring, n = 4..10, CMP and
// WBG; three SNGs at n = 5 with the published permutation sets), and the
// multiplier accuracy. Counts how often each mechanism was exercised: LFSR
// period wrap, enable hold, CMP and WBG conversion, and more than two SNGs.
module tb_shared_lfsr_sngs;
  import sng_pkg::*;

  localparam int NC = 16;
  // Configuration kinds, by instance number, for the mechanism counts.
  localparam bit IS_WBG [NC] = '{0, 1, 0, 1, 0, 1, 0, 1, 0, 1, 0, 0, 0, 1, 1, 0};
  localparam bit IS_M3  [NC] = '{0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 1, 1, 0, 0, 0, 0};

  logic [NC-1:0] done;
  int checks_v [NC], failures_v [NC], wrap_v [NC], stall_v [NC];

  sng_sweep #(.N(4), .PCC(PCC_CMP), .EXP_SCC('{0.473, 0.0, 0.0}), .NAME("n4 CMP"))
    c0 (.done(done[0]), .checks(checks_v[0]), .failures(failures_v[0]), .n_wrap(wrap_v[0]), .n_stall(stall_v[0]));
  sng_sweep #(.N(4), .PCC(PCC_WBG), .EXP_SCC('{0.387, 0.0, 0.0}), .NAME("n4 WBG"))
    c1 (.done(done[1]), .checks(checks_v[1]), .failures(failures_v[1]), .n_wrap(wrap_v[1]), .n_stall(stall_v[1]));
  sng_sweep #(.N(5), .PCC(PCC_CMP), .EXP_SCC('{0.372, 0.0, 0.0}), .NAME("n5 CMP"))
    c2 (.done(done[2]), .checks(checks_v[2]), .failures(failures_v[2]), .n_wrap(wrap_v[2]), .n_stall(stall_v[2]));
  sng_sweep #(.N(5), .PCC(PCC_WBG), .EXP_SCC('{0.286, 0.0, 0.0}), .NAME("n5 WBG"))
    c3 (.done(done[3]), .checks(checks_v[3]), .failures(failures_v[3]), .n_wrap(wrap_v[3]), .n_stall(stall_v[3]));
  sng_sweep #(.N(6), .PCC(PCC_CMP), .EXP_SCC('{0.274, 0.0, 0.0}), .NAME("n6 CMP"))
    c4 (.done(done[4]), .checks(checks_v[4]), .failures(failures_v[4]), .n_wrap(wrap_v[4]), .n_stall(stall_v[4]));
  sng_sweep #(.N(6), .PCC(PCC_WBG), .EXP_SCC('{0.198, 0.0, 0.0}), .NAME("n6 WBG"))
    c5 (.done(done[5]), .checks(checks_v[5]), .failures(failures_v[5]), .n_wrap(wrap_v[5]), .n_stall(stall_v[5]));
  sng_sweep #(.N(7), .PCC(PCC_CMP), .EXP_SCC('{0.192, 0.0, 0.0}), .NAME("n7 CMP"))
    c6 (.done(done[6]), .checks(checks_v[6]), .failures(failures_v[6]), .n_wrap(wrap_v[6]), .n_stall(stall_v[6]));
  sng_sweep #(.N(7), .PCC(PCC_WBG), .EXP_SCC('{0.132, 0.0, 0.0}), .NAME("n7 WBG"))
    c7 (.done(done[7]), .checks(checks_v[7]), .failures(failures_v[7]), .n_wrap(wrap_v[7]), .n_stall(stall_v[7]));
  sng_sweep #(.N(8), .PCC(PCC_CMP), .EXP_SCC('{0.130, 0.0, 0.0}), .MSE_MAX(0.00002), .NAME("n8 CMP"))
    c8 (.done(done[8]), .checks(checks_v[8]), .failures(failures_v[8]), .n_wrap(wrap_v[8]), .n_stall(stall_v[8]));
  sng_sweep #(.N(8), .PCC(PCC_WBG), .EXP_SCC('{0.085, 0.0, 0.0}), .NAME("n8 WBG"))
    c9 (.done(done[9]), .checks(checks_v[9]), .failures(failures_v[9]), .n_wrap(wrap_v[9]), .n_stall(stall_v[9]));
  sng_sweep #(.N(9), .PCC(PCC_CMP), .EXP_SCC('{0.086, 0.0, 0.0}), .NAME("n9 CMP"))
    c12 (.done(done[12]), .checks(checks_v[12]), .failures(failures_v[12]), .n_wrap(wrap_v[12]), .n_stall(stall_v[12]));
  sng_sweep #(.N(10), .PCC(PCC_WBG), .EXP_SCC('{0.033, 0.0, 0.0}), .NAME("n10 WBG"))
    c13 (.done(done[13]), .checks(checks_v[13]), .failures(failures_v[13]), .n_wrap(wrap_v[13]), .n_stall(stall_v[13]));
  sng_sweep #(.N(9), .PCC(PCC_WBG), .EXP_SCC('{0.053, 0.0, 0.0}), .NAME("n9 WBG"))
    c14 (.done(done[14]), .checks(checks_v[14]), .failures(failures_v[14]), .n_wrap(wrap_v[14]), .n_stall(stall_v[14]));
  sng_sweep #(.N(10), .PCC(PCC_CMP), .EXP_SCC('{0.054, 0.0, 0.0}), .NAME("n10 CMP"))
    c15 (.done(done[15]), .checks(checks_v[15]), .failures(failures_v[15]), .n_wrap(wrap_v[15]), .n_stall(stall_v[15]));
  // Three SNGs on a 5-bit LFSR, permutation sets of the exact search and of
  // the similarity-function search; both published with pairwise values
  // 0.4887, 0.4882, 0.4885.
  sng_sweep #(.N(5), .M(3), .PCC(PCC_CMP), .PERM_IDX({64'd88, 64'd44, 64'd12}),
              .EXP_SCC('{0.4887, 0.4882, 0.4885}), .TOL(0.0001), .NAME("n5 m3 exact set"))
    c10 (.done(done[10]), .checks(checks_v[10]), .failures(failures_v[10]), .n_wrap(wrap_v[10]), .n_stall(stall_v[10]));
  sng_sweep #(.N(5), .M(3), .PCC(PCC_CMP), .PERM_IDX({64'd61, 64'd46, 64'd23}),
              .EXP_SCC('{0.4887, 0.4882, 0.4885}), .TOL(0.0001), .NAME("n5 m3 similarity set"))
    c11 (.done(done[11]), .checks(checks_v[11]), .failures(failures_v[11]), .n_wrap(wrap_v[11]), .n_stall(stall_v[11]));

  initial begin : watchdog
    #100000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

  initial begin : main
    int checks, failures, wraps, stalls, cmp_runs, wbg_runs, multi_runs;
    wait (&done);
    checks = 0; failures = 0; wraps = 0; stalls = 0;
    for (int c = 0; c < NC; c++) begin
      checks   += checks_v[c];
      failures += failures_v[c];
      wraps    += wrap_v[c];
      stalls   += stall_v[c];
    end
    cmp_runs = 0; wbg_runs = 0;
    multi_runs = 0;
    for (int c = 0; c < NC; c++) begin
      if (IS_WBG[c]) wbg_runs += wrap_v[c];
      else           cmp_runs += wrap_v[c];
      if (IS_M3[c])  multi_runs += wrap_v[c];
    end
    $display("mechanisms: period wraps %0d, enable holds %0d, CMP periods %0d, WBG periods %0d, three-SNG periods %0d",
             wraps, stalls, cmp_runs, wbg_runs, multi_runs);
    checks += 5;
    if (wraps == 0)      begin failures++; $display("FAIL: no LFSR period completed"); end
    if (stalls == 0)     begin failures++; $display("FAIL: enable hold never exercised"); end
    if (cmp_runs == 0)   begin failures++; $display("FAIL: CMP never exercised"); end
    if (wbg_runs == 0)   begin failures++; $display("FAIL: WBG never exercised"); end
    if (multi_runs == 0) begin failures++; $display("FAIL: three-SNG sharing never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench helper: drives one shared_lfsr_sngs instance through a full
// sweep and measures what the method is about.
//
// For every input value x = 0..2^N-1 (the same x on all SNGs) it runs one
// LFSR period of L = 2^N-1 cycles and records each SNG's stream. It checks
// that the LFSR is back at its seed after each period and that every stream
// holds exactly x ones. Once, in the middle of a period, it drops en for
// three cycles and checks that state and outputs hold. Then 16 periods with
// independent random inputs per SNG check each ones count. After that it
// computes, for each pair of SNGs, the average |SCC| over all inputs
// x, y = 1..L and compares the sorted list with the expected values
// (EXP_SCC, published figures) within TOL. It also measures the
// mean-squared error of a stochastic multiplier (AND of the streams of SNG 0
// and SNG 1) over all input pairs, and of the same multiplier fed from one
// unpermuted stream (simple sharing), and checks that the permuted pair is
// better by at least a factor of 5 and below MSE_MAX.
module sng_sweep
  import sng_pkg::*;
  import sc_tb_pkg::*;
#(
  parameter int unsigned     N            = 4,
  parameter int unsigned     M            = 2,
  parameter pcc_e            PCC          = PCC_CMP,
  parameter logic [M-1:0][63:0] PERM_IDX = {64'd1, 64'(factorial(N))},
  parameter int unsigned     NP           = M * (M - 1) / 2,
  parameter real             EXP_SCC [3]  = '{0.473, 0.0, 0.0},
  parameter real             TOL          = 0.001,
  parameter real             MSE_MAX      = 1.0,
  parameter string           NAME         = "config"
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_wrap,
  output int   n_stall
);

  localparam int L = (1 << N) - 1;

  logic                clk;
  logic                rst_n;
  logic                en;
  logic [M-1:0][N-1:0] x;
  logic [M-1:0]        s;
  logic [N-1:0]        lfsr_q;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  shared_lfsr_sngs #(.N(N), .M(M), .PCC(PCC), .PERM_IDX(PERM_IDX)) dut (
    .clk, .rst_n, .en, .x, .s, .lfsr_q
  );

  stream_t str [M][1 << N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL [%s]: %s", NAME, what);
    end
  endtask

  initial begin : main
    real meas [NP];
    real expv [NP];
    real t;
    real mse_perm, mse_same, prod;
    int  ones, k;
    logic [N-1:0] q_hold;
    logic [M-1:0] s_hold;

    rst_n = 1'b0; en = 1'b0;
    done = 1'b0; checks = 0; failures = 0; n_wrap = 0; n_stall = 0;
    x = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    en = 1'b1;

    for (int v = 0; v <= L; v++) begin
      for (int g = 0; g < M; g++) x[g] = N'(v);
      for (int g = 0; g < M; g++) str[g][v] = '0;
      for (int c = 0; c < L; c++) begin
        #1;
        for (int g = 0; g < M; g++) str[g][v][c] = s[g];
        if (v == 5 && c == 3) begin
          q_hold = lfsr_q; s_hold = s;
          en = 1'b0;
          repeat (3) @(posedge clk);
          #1 check(lfsr_q == q_hold && s == s_hold, "en=0 holds state and outputs");
          n_stall++;
          en = 1'b1;
        end
        @(posedge clk);
      end
      #1;
      check(lfsr_q == N'(1), $sformatf("LFSR back at the seed after period %0d", v));
      if (lfsr_q == N'(1)) n_wrap++;
      for (int g = 0; g < M; g++) begin
        ones = $countones(str[g][v]);
        check(ones == v, $sformatf("SNG %0d, x=%0d: %0d ones in %0d bits", g, v, ones, L));
      end
    end

    // Independent random inputs per SNG: each stream must count its own x.
    for (int p = 0; p < 16; p++) begin
      int cnt [M];
      for (int g = 0; g < M; g++) begin
        x[g] = N'($urandom_range(0, L));
        cnt[g] = 0;
      end
      for (int c = 0; c < L; c++) begin
        #1;
        for (int g = 0; g < M; g++) cnt[g] += int'(s[g]);
        @(posedge clk);
      end
      for (int g = 0; g < M; g++)
        check(cnt[g] == int'(x[g]), $sformatf("random x: SNG %0d, x=%0d gives %0d ones", g, x[g], cnt[g]));
    end

    // Average |SCC| between every pair of SNGs over inputs 1..L.
    k = 0;
    for (int a = 0; a < M; a++) begin
      for (int b = a + 1; b < M; b++) begin
        t = 0.0;
        for (int i = 1; i <= L; i++)
          for (int j = 1; j <= L; j++)
            t += fabs(scc(str[a][i], str[b][j], L));
        meas[k] = t / (real'(L) * real'(L));
        $display("[%s] SCC_avg(SNG%0d, SNG%0d) = %.4f", NAME, a, b, meas[k]);
        k++;
      end
    end
    for (int p = 0; p < NP; p++) expv[p] = EXP_SCC[p];
    meas.sort();
    expv.sort();
    for (int p = 0; p < NP; p++)
      check(fabs(meas[p] - expv[p]) <= TOL,
            $sformatf("SCC_avg %.4f against published %.4f", meas[p], expv[p]));

    // Stochastic multiplier: AND of two streams, over all input pairs.
    mse_perm = 0.0; mse_same = 0.0;
    for (int i = 0; i <= L; i++) begin
      for (int j = 0; j <= L; j++) begin
        prod = (real'(i) / L) * (real'(j) / L);
        t = real'($countones(str[0][i] & str[1][j])) / L - prod;
        mse_perm += t * t;
        t = real'($countones(str[0][i] & str[0][j])) / L - prod;
        mse_same += t * t;
      end
    end
    mse_perm /= real'(L + 1) * real'(L + 1);
    mse_same /= real'(L + 1) * real'(L + 1);
    $display("[%s] multiplier MSE: permuted pair %.6f, simple share %.6f", NAME, mse_perm, mse_same);
    check(mse_perm * 5.0 < mse_same, "permuted sharing beats simple sharing by 5x in MSE");
    check(mse_perm <= MSE_MAX, $sformatf("multiplier MSE %.6f within %.6f", mse_perm, MSE_MAX));

    done = 1'b1;
  end
endmodule

// Testbench of lfsr. A 4-bit instance must reproduce the published 15-state
// sequence from seed 0001 and the SCC of -0.0816 between the L2 and L1
// streams; 4-, 8- and 10-bit instances must visit every nonzero state exactly
// once per 2^N-1 cycles and return to the seed; en = 0 must hold the state
// and reset must reload the seed.
module tb_lfsr;
  import sc_tb_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [3:0] q4;
  logic [7:0] q8;
  logic [9:0] q10;

  always #5 clk = ~clk;

  lfsr #(.N(4))                  u4  (.clk, .rst_n, .en, .q(q4));
  lfsr                           u8  (.clk, .rst_n, .en, .q(q8));
  lfsr #(.N(10), .SEED(10'h2A5)) u10 (.clk, .rst_n, .en, .q(q10));

  // Published 4-bit sequence, L4 L3 L2 L1.
  localparam logic [3:0] SEQ4 [15] = '{4'b0001, 4'b1000, 4'b0100, 4'b0010, 4'b1001,
                                       4'b1100, 4'b0110, 4'b1011, 4'b0101, 4'b1010,
                                       4'b1101, 4'b1110, 4'b1111, 4'b0111, 4'b0011};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    bit seen8 [256];
    bit seen10 [1024];
    int first_rep8, first_rep10;
    stream_t l1s, l2s;
    real c;

    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check(q4 == 4'b0001 && q8 == 8'h01 && q10 == 10'h2A5, "reset loads the seed");

    // Hold with en = 0.
    repeat (3) @(posedge clk);
    #1 check(q4 == 4'b0001 && q8 == 8'h01, "en=0 holds the state");

    en = 1'b1;
    first_rep8 = 0; first_rep10 = 0;
    foreach (seen8[i]) seen8[i] = 1'b0;
    foreach (seen10[i]) seen10[i] = 1'b0;
    l1s = '0; l2s = '0;
    for (int t = 0; t < 1023; t++) begin
      if (t < 15) begin
        check(q4 == SEQ4[t], $sformatf("4-bit state %0d: got %b want %b", t, q4, SEQ4[t]));
        l1s[t] = q4[0];
        l2s[t] = q4[1];
      end
      if (t < 255) begin
        if (seen8[q8] && first_rep8 == 0) first_rep8 = t;
        seen8[q8] = 1'b1;
      end
      if (seen10[q10] && first_rep10 == 0) first_rep10 = t;
      seen10[q10] = 1'b1;
      @(posedge clk);
      #1;
      if (t == 14) check(q4 == 4'b0001, "4-bit LFSR returns to 0001 after 15 cycles");
      if (t == 254) check(q8 == 8'h01, "8-bit LFSR returns to the seed after 255 cycles");
    end
    check(q10 == 10'h2A5, "10-bit LFSR returns to the seed after 1023 cycles");
    check(first_rep8 == 0 && !seen8[0], "8-bit LFSR: 255 distinct nonzero states");
    check(first_rep10 == 0 && !seen10[0], "10-bit LFSR: 1023 distinct nonzero states");

    c = scc(l2s, l1s, 15);
    $display("SCC(L2, L1) = %f", c);
    check(fabs(c - (-0.0816)) < 0.0005, "SCC(L2,L1) of the 4-bit LFSR is -0.0816");

    // Reset mid-sequence reloads the seed.
    rst_n = 1'b0;
    @(posedge clk);
    #1 check(q4 == 4'b0001 && q8 == 8'h01 && q10 == 10'h2A5, "reset mid-run reloads the seed");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

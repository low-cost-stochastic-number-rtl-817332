// Testbench of pcc_cmp. Checks the published 4-bit example (x = 1011 over the
// 15 LFSR states, S column of the table), then every (r, x) pair at N = 4 and
// N = 8 against a reference comparator: s = 1 when r <= x (integer comparison),
// and that each x gives exactly x ones over r = 1..2^N-1.
module tb_pcc_cmp;

  int checks = 0, failures = 0;
  logic [3:0] r4, x4;
  logic [7:0] r8, x8;
  logic       s4, s8;

  pcc_cmp #(.N(4)) u4 (.r(r4), .x(x4), .s(s4));
  pcc_cmp          u8 (.r(r8), .x(x8), .s(s8));

  localparam logic [3:0] SEQ4 [15] = '{4'b0001, 4'b1000, 4'b0100, 4'b0010, 4'b1001,
                                       4'b1100, 4'b0110, 4'b1011, 4'b0101, 4'b1010,
                                       4'b1101, 4'b1110, 4'b1111, 4'b0111, 4'b0011};
  localparam bit S_PUB [15] = '{1,1,1,1,1,0,1,1,1,1,0,0,0,1,1};

  function automatic bit ref_wbg(input int r, input int x);
    for (int j = 15; j >= 0; j--) if (r[j]) return x[j];
    return 1'b0;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    int ones;
    x4 = 4'b1011;
    ones = 0;
    for (int t = 0; t < 15; t++) begin
      r4 = SEQ4[t];
      #1 check(s4 == S_PUB[t], $sformatf("published example row %0d (r=%b): got %b", t, r4, s4));
      ones += int'(s4);
    end
    check(ones == 11, "published example: 11 ones out of 15");

    for (int x = 0; x < 16; x++) begin
      ones = 0;
      for (int r = 0; r < 16; r++) begin
        r4 = 4'(r); x4 = 4'(x);
        #1 check(s4 == (int'(r) <= int'(x)), $sformatf("N=4 r=%0d x=%0d: got %b", r, x, s4));
        if (r != 0) ones += int'(s4);
      end
      check(ones == x, $sformatf("N=4 x=%0d gives %0d ones", x, ones));
    end

    for (int x = 0; x < 256; x++) begin
      ones = 0;
      for (int r = 0; r < 256; r++) begin
        r8 = 8'(r); x8 = 8'(x);
        #1 check(s8 == (int'(r) <= int'(x)), $sformatf("N=8 r=%0d x=%0d: got %b", r, x, s8));
        if (r != 0) ones += int'(s8);
      end
      check(ones == x, $sformatf("N=8 x=%0d gives %0d ones", x, ones));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench of perm_sng. Several 4-bit and 8-bit SNGs with different
// permutation indices and both PCC types are driven with the same LFSR state
// l and input x. Each output is compared with a reference that permutes l by
// the reverse-lexicographic permutation found by stepping through the
// permutations one by one, then applies r <= x (CMP) or the
// highest-set-bit rule (WBG). Also checks the two wirings spelled out for
// n = 4: index 1 wires L4..L1 to r1..r4 and index 2 is [L4, L3, L1, L2].
module tb_perm_sng;
  import sng_pkg::*;
  import sc_tb_pkg::*;

  localparam int NK4 = 6;
  localparam int NK8 = 4;
  localparam longint K4 [NK4] = '{1, 2, 7, 13, 23, 24};
  localparam longint K8 [NK8] = '{1, 40320, 12345, 777};

  int checks = 0, failures = 0;
  logic [3:0] l4, x4;
  logic [7:0] l8, x8;
  logic [NK4-1:0] s4_cmp, s4_wbg;
  logic [NK8-1:0] s8_cmp, s8_wbg;

  for (genvar g = 0; g < NK4; g++) begin : g4
    perm_sng #(.N(4), .PERM_IDX(K4[g]), .PCC(PCC_CMP)) u_c (.l(l4), .x(x4), .s(s4_cmp[g]));
    perm_sng #(.N(4), .PERM_IDX(K4[g]), .PCC(PCC_WBG)) u_w (.l(l4), .x(x4), .s(s4_wbg[g]));
  end
  for (genvar g = 0; g < NK8; g++) begin : g8
    perm_sng #(.N(8), .PERM_IDX(K8[g]), .PCC(PCC_CMP)) u_c (.l(l8), .x(x8), .s(s8_cmp[g]));
    perm_sng #(.N(8), .PERM_IDX(K8[g]), .PCC(PCC_WBG)) u_w (.l(l8), .x(x8), .s(s8_wbg[g]));
  end

  function automatic int permute(input int l, input perm_a p, input int n);
    int r = 0;
    for (int i = 0; i < n; i++) r[i] = l[p[i] - 1];
    return r;
  endfunction

  function automatic bit ref_pcc(input bit wbg, input int r, input int x);
    if (!wbg) return r <= x;
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
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    perm_a p4 [NK4];
    perm_a p8 [NK8];
    int r;
    for (int g = 0; g < NK4; g++) p4[g] = ref_perm(4, K4[g]);
    for (int g = 0; g < NK8; g++) p8[g] = ref_perm(8, K8[g]);
    check(p4[0][0] == 4 && p4[0][1] == 3 && p4[0][2] == 2 && p4[0][3] == 1, "reference PL_1 = [4,3,2,1]");
    check(p4[1][0] == 4 && p4[1][1] == 3 && p4[1][2] == 1 && p4[1][3] == 2, "reference PL_2 = [4,3,1,2]");
    check(p4[5][0] == 1 && p4[5][3] == 4, "reference PL_24 = [1,2,3,4]");

    for (int l = 1; l < 16; l++) begin
      for (int x = 0; x < 16; x++) begin
        l4 = 4'(l); x4 = 4'(x);
        #1;
        for (int g = 0; g < NK4; g++) begin
          r = permute(l, p4[g], 4);
          check(s4_cmp[g] == ref_pcc(0, r, x), $sformatf("N=4 k=%0d CMP l=%b x=%0d", K4[g], l4, x));
          check(s4_wbg[g] == ref_pcc(1, r, x), $sformatf("N=4 k=%0d WBG l=%b x=%0d", K4[g], l4, x));
        end
        // Index 1 is the bit reversal of l.
        check(s4_cmp[0] == ({l4[0], l4[1], l4[2], l4[3]} <= x4), "N=4 k=1 is the reversed wiring");
      end
    end

    for (int t = 0; t < 20000; t++) begin
      l8 = 8'($urandom_range(1, 255));
      x8 = 8'($urandom_range(0, 255));
      #1;
      for (int g = 0; g < NK8; g++) begin
        r = permute(int'(l8), p8[g], 8);
        check(s8_cmp[g] == ref_pcc(0, r, int'(x8)), $sformatf("N=8 k=%0d CMP l=%h x=%0d", K8[g], l8, x8));
        check(s8_wbg[g] == ref_pcc(1, r, int'(x8)), $sformatf("N=8 k=%0d WBG l=%h x=%0d", K8[g], l8, x8));
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

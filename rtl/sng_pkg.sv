// Shared types and constant functions for the shared-LFSR stochastic number
// generators.
//
// pcc_e       selects the probability conversion circuit of an SNG: a
//             comparator (CMP) or a weighted binary generator (WBG).
// lfsr_taps   feedback mask of a maximal-length Fibonacci LFSR that shifts
//             towards L1 and feeds the XOR of the masked flip-flops back into
//             Ln. Only the 4-bit taps (L2 xor L1) are fixed by the
//             published sequence; the others were found by an exhaustive
//             search for period 2^n-1 in this shift direction.
// factorial   n!, used as the index of the identity permutation.
// perm_rlex   the k-th permutation of [1..n] in reverse lexicographic order
//             (k = 1 gives [n, ..., 1], k = n! gives [1, ..., n]), the order
//             in which the design's permutation indices are numbered.
package sng_pkg;

  localparam int unsigned MAX_N = 16;

  typedef enum logic [0:0] {
    PCC_CMP = 1'b0,
    PCC_WBG = 1'b1
  } pcc_e;

  // One 5-bit LFSR position (1..n) per PCC input r_1..r_MAX_N.
  typedef logic [MAX_N-1:0][4:0] perm_t;

  // Bit t-1 set means flip-flop L_t feeds the XOR.
  function automatic logic [MAX_N-1:0] lfsr_taps(input int unsigned n);
    case (n)
      2:       return 16'h0003;  // L2 ^ L1
      3:       return 16'h0003;  // L2 ^ L1
      4:       return 16'h0003;  // L2 ^ L1
      5:       return 16'h0005;  // L3 ^ L1
      6:       return 16'h0003;  // L2 ^ L1
      7:       return 16'h0003;  // L2 ^ L1
      8:       return 16'h0087;  // L8 ^ L3 ^ L2 ^ L1
      9:       return 16'h0011;  // L5 ^ L1
      10:      return 16'h0009;  // L4 ^ L1
      11:      return 16'h0005;  // L3 ^ L1
      12:      return 16'h0107;  // L9 ^ L3 ^ L2 ^ L1
      13:      return 16'h0027;  // L6 ^ L3 ^ L2 ^ L1
      14:      return 16'h1007;  // L13 ^ L3 ^ L2 ^ L1
      15:      return 16'h0003;  // L2 ^ L1
      16:      return 16'h100B;  // L13 ^ L4 ^ L2 ^ L1
      default: return '0;
    endcase
  endfunction

  function automatic longint unsigned factorial(input int unsigned n);
    longint unsigned f = 1;
    for (int unsigned i = 2; i <= n; i++) f *= longint'(i);
    return f;
  endfunction

  // Factoradic decoding of the ascending-order rank n! - k.
  function automatic perm_t perm_rlex(input int unsigned n, input longint unsigned k);
    perm_t            p = '0;
    logic [MAX_N:1]   used = '0;
    longint unsigned  q = factorial(n) - k;
    longint unsigned  f;
    int unsigned      d;
    int unsigned      seen;
    for (int unsigned i = 0; i < n; i++) begin
      f = factorial(n - 1 - i);
      d = int'(q / f);
      q = q % f;
      seen = 0;
      for (int unsigned v = 1; v <= MAX_N; v++) begin
        if (v <= n && !used[v]) begin
          if (seen == d) begin
            p[i] = 5'(v);
            used[v] = 1'b1;
          end
          seen++;
        end
      end
    end
    return p;
  endfunction

endpackage

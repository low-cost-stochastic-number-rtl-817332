// M stochastic number generators sharing one N-bit LFSR.
//
// One maximal-length LFSR produces a random number per cycle. Each SNG sees
// it through its own wiring permutation (PERM_IDX[g], numbered in reverse
// lexicographic order) and converts its binary input x[g] into a bit stream
// s[g] with probability x[g]/(2^N-1); over any 2^N-1 consecutive enabled
// cycles s[g] holds exactly x[g] ones. The default is the two-SNG, 8-bit
// arrangement: SNG 0 wired directly (index N!) and SNG 1 wired in reverse
// (index 1), the pair with the lowest average stochastic-computing
// correlation. More SNGs are obtained by overriding M and PERM_IDX with a
// chosen set of permutations. Reset, enable and the CMP default are this
// design's choices.
//
// Interface: clk, rst_n (synchronous, active low), en (advance the LFSR),
// x[g] (binary input of SNG g), s[g] (its stochastic bit), lfsr_q (the shared
// state). Timing: s is combinational from the LFSR state and x; a new bit
// appears after each enabled clock edge, one bit per cycle.
module shared_lfsr_sngs
  import sng_pkg::*;
#(
  parameter int unsigned     N            = 8,
  parameter int unsigned     M            = 2,
  parameter pcc_e            PCC          = PCC_CMP,
  parameter logic [N-1:0]    SEED         = N'(1),
  // PERM_IDX[g] is the permutation index of SNG g (element 0 is the least
  // significant 64-bit slice).
  parameter logic [M-1:0][63:0] PERM_IDX = {64'd1, 64'(factorial(N))}
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic [M-1:0][N-1:0] x,
  output logic [M-1:0]        s,
  output logic [N-1:0]        lfsr_q
);

  lfsr #(.N(N), .SEED(SEED)) u_lfsr (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (en),
    .q     (lfsr_q)
  );

  for (genvar g = 0; g < int'(M); g++) begin : g_sng
    perm_sng #(.N(N), .PERM_IDX(longint'(PERM_IDX[g])), .PCC(PCC)) u_sng (
      .l (lfsr_q),
      .x (x[g]),
      .s (s[g])
    );
  end

endmodule

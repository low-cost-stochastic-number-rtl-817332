// One stochastic number generator of a shared-LFSR group.
//
// The SNG owns no random source: it takes the state of a shared LFSR and
// connects it to its probability conversion circuit through a fixed
// permutation, PCC input r_i <= LFSR output L_{PL(i)}, where PL is the
// PERM_IDX-th permutation of [1..N] in reverse lexicographic order
// ([N..1] first, [1..N] last). Different permutations give the SNGs different
// random-number sequences at no cost but wiring; PERM_IDX = 1 (full reversal)
// is the least correlated with the direct connection PERM_IDX = N!. The
// permutation is computed at elaboration by sng_pkg::perm_rlex. The PCC is a
// comparator or a weighted binary generator, chosen by PCC; which of the two
// to use is left open by the method, CMP is this design's default.
//
// Interface: l (l[i-1] = L_i), x, s. Purely combinational.
module perm_sng
  import sng_pkg::*;
#(
  parameter int unsigned     N        = 8,
  parameter longint unsigned PERM_IDX = 1,
  parameter pcc_e            PCC      = PCC_CMP
) (
  input  logic [N-1:0] l,
  input  logic [N-1:0] x,
  output logic         s
);

  localparam perm_t PL = perm_rlex(N, PERM_IDX);

  logic [N-1:0] r;

  for (genvar i = 0; i < int'(N); i++) begin : g_wire
    localparam int SRC = int'(PL[i]) - 1;  // r_{i+1} <= L_{SRC+1}
    assign r[i] = l[SRC];
  end

  if (PCC == PCC_WBG) begin : g_wbg
    pcc_wbg #(.N(N)) u_pcc (.r(r), .x(x), .s(s));
  end else begin : g_cmp
    pcc_cmp #(.N(N)) u_pcc (.r(r), .x(x), .s(s));
  end

  initial begin
    assert (PERM_IDX >= 1 && PERM_IDX <= factorial(N))
      else $error("perm_sng: PERM_IDX=%0d outside 1..%0d", PERM_IDX, factorial(N));
  end

endmodule

// Comparator probability conversion circuit (CMP).
//
// Turns one n-bit random number r per cycle into one stochastic bit for the
// binary value x: s = 1 when r <= x. Fed by a maximal-length LFSR, r takes
// every value 1..2^n-1 once per period, so exactly x bits of the period are 1
// and the stream has probability x/(2^n-1). The "<=" (rather than "<")
// follows the published example for x = 1011, where r = 1011 gives a 1 and the
// period holds 11 ones. Written as a magnitude comparison; synthesis picks
// the gates.
//
// Interface: r (r[i-1] = PCC input r_i), x, s. Purely combinational.
module pcc_cmp #(
  parameter int unsigned N = 8
) (
  input  logic [N-1:0] r,
  input  logic [N-1:0] x,
  output logic         s
);

  always_comb s = (r <= x);

endmodule

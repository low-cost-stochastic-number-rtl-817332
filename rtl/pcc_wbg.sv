// Weighted binary generator probability conversion circuit (WBG).
//
// A chain of AND gates with inverted inputs turns the random number r into
// one-hot weights: w_1 = r_n, w_2 = r_{n-1} & ~r_n, ..., w_n = r_1 & ~r_2 &
// ... & ~r_n, so w_k is 1 with probability about 2^-k. Each weight w_k gates
// bit x_{n-k+1} of the binary input and the products are ORed:
// s = x[j], where j is the position of the most significant 1 in r. Over one
// LFSR period this gives x ones, like the comparator, but in a different
// order. The pairing of the weight 1/2 with the most significant LFSR bit
// follows the published 4-bit example (x = 1011 gives 11 ones in the listed
// order); r = 0 gives s = 0.
//
// Interface: r (r[i-1] = PCC input r_i), x, s. Purely combinational.
module pcc_wbg #(
  parameter int unsigned N = 8
) (
  input  logic [N-1:0] r,
  input  logic [N-1:0] x,
  output logic         s
);

  logic [N-1:0] w;      // w[j] = 1 when r[j] is the highest 1 of r
  logic [N-1:0] above;  // above[j] = 1 when some bit of r above j is 1

  always_comb begin
    above[N-1] = 1'b0;
    for (int j = N - 2; j >= 0; j--) above[j] = above[j+1] | r[j+1];
    w = r & ~above;
    s = |(w & x);
  end

endmodule

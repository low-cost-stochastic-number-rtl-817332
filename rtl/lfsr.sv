// Maximal-length Fibonacci LFSR: the random number source shared by the SNGs.
//
// The state is n flip-flops L1..Ln (q[i-1] = L_i). Every enabled clock the
// register shifts towards L1 (L_i <= L_{i+1}) and Ln takes the XOR of the
// flip-flops selected by sng_pkg::lfsr_taps(N). The state visits every value
// 1..2^N-1 once per period of 2^N-1 cycles. For N = 4 the feedback is
// L2 xor L1, which, started from 0001, gives exactly the published 4-bit
// sequence 0001, 1000, 0100, 0010, 1001, ... . The taps for other widths are
// this design's own choice (any maximal-length polynomial gives the same
// correlation figures).
//
// Interface: clk, rst_n (synchronous, active low, loads SEED), en (hold the
// state when low), q (the current state). Timing: q changes one cycle after
// an enabled edge; reset and enable are additions of this design.
module lfsr
  import sng_pkg::*;
#(
  parameter int unsigned     N    = 8,
  parameter logic [N-1:0]    SEED = N'(1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  output logic [N-1:0] q
);

  localparam logic [MAX_N-1:0] TAPS_ALL = lfsr_taps(N);
  localparam logic [N-1:0]     TAPS     = TAPS_ALL[N-1:0];

  logic fb;

  always_comb fb = ^(q & TAPS);

  always_ff @(posedge clk) begin
    if (!rst_n)  q <= SEED;
    else if (en) q <= {fb, q[N-1:1]};
  end

  initial begin
    assert (N >= 2 && N <= MAX_N) else $error("lfsr: N=%0d outside 2..%0d", N, MAX_N);
    assert (SEED != '0) else $error("lfsr: an all-zero seed locks the LFSR");
  end

  // A maximal-length LFSR never reaches the all-zero state.
  a_nonzero: assert property (@(posedge clk) disable iff (!rst_n) q != '0);

endmodule

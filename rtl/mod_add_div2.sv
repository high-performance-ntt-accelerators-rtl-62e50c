// mod_add_div2 -- merged modular addition and INTT division by two on the
// redundant range [0, 2q).
//
// NTT mode: out = x + y, minus 2q when the sum reaches 2q, so the result stays
// in [0, 2q). INTT mode: out = (x + y) / 2 mod q, computed without first
// correcting the sum. Because 2q is even, sum and sum - 2q have the same
// parity, so one constant chosen from {0, +q, -q, -2q} by the mode, the parity
// of sum and the test sum < 2q, added to sum and followed by an optional shift,
// does both steps at once:
//   NTT : sum < 2q -> +0          sum >= 2q -> -2q        (no shift)
//   INTT: sum even -> +0          odd, sum < 2q -> +q     odd, sum >= 2q -> -q
//         then shift right by one.
// This is the paper's merged add/scale block; the encoding of the constant
// selector is this design's own.
//
// Interface: purely combinational. Inputs x, y < 2q; q odd with 8q < 2**W.
// Output in [0, 2q).
module mod_add_div2 #(
  parameter int unsigned W = 17
) (
  input  ntt_pkg::mode_e mode,
  input  logic [W-1:0]   q,
  input  logic [W-1:0]   x,
  input  logic [W-1:0]   y,
  output logic [W-1:0]   out
);
  typedef enum logic [1:0] {K_ZERO, K_PLUS_Q, K_MINUS_Q, K_MINUS_2Q} corr_e;

  logic [W-1:0] sum, q2, k, t;
  logic         lt2q, even;
  corr_e        sel;

  always_comb begin
    q2   = q << 1;
    sum  = x + y;                    // < 4q < 2**W: no overflow
    lt2q = sum < q2;
    even = ~sum[0];
    if (mode == ntt_pkg::MODE_NTT) sel = lt2q ? K_ZERO : K_MINUS_2Q;
    else if (even)                 sel = K_ZERO;
    else                           sel = lt2q ? K_PLUS_Q : K_MINUS_Q;
    unique case (sel)
      K_ZERO:     k = '0;
      K_PLUS_Q:   k = q;
      K_MINUS_Q:  k = -q;
      K_MINUS_2Q: k = -q2;
    endcase
    t   = sum + k;
    out = (mode == ntt_pkg::MODE_NTT) ? t : (t >> 1);
  end
endmodule

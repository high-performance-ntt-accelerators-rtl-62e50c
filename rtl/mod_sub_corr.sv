// mod_sub_corr -- modular subtraction x - y on the redundant range [0, 2q)
// with the single correction step the unified butterfly keeps.
//
// The difference d = x - y lies in (-2q, 2q). The unit forms d + 2q in
// parallel and, when d + 2q < 2q (that is, d is negative), selects it; the
// result is therefore in [0, 2q). This is correction step 4 of the butterfly,
// with its constant raised from q to 2q as the redundant range requires.
//
// Interface: purely combinational. Inputs x, y < 2q with 4q < 2**W.
module mod_sub_corr #(
  parameter int unsigned W = 17
) (
  input  logic [W-1:0] q,
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  output logic [W-1:0] out
);
  logic [W:0] d, d2, q2;
  always_comb begin
    q2  = {q, 1'b0};
    d   = {1'b0, x} - {1'b0, y};     // two's complement, W+1 bits
    d2  = d + q2;                    // always positive
    out = (d2 < q2) ? d2[W-1:0] : d[W-1:0];
  end
endmodule

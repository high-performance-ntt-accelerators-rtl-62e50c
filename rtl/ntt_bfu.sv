// ntt_bfu -- unified NTT/INTT butterfly processing element on redundant
// Montgomery operands.
//
// Every operand is in Montgomery form and may take any value in [0, 2q) (each
// residue has two representatives). With R = 2**W > 8q this range is closed
// under the butterfly, so the Montgomery multiplier needs no final correction
// and the subtractor in front of it needs none either:
//   NTT  (mode 1): a' = a + b*w            b' = a - b*w          (mod q)
//   INTT (mode 0): a' = (a + b)/2          b' = (a - b + 2q)*w   (mod q)
// In INTT mode the twiddle w is expected to be pre-divided by two, which makes
// b' = (a - b)*w_orig/2; the remaining halving of a' is merged with the adder's
// correction (mod_add_div2). a - b + 2q is formed by a carry-save adder on
// a, ~b and 2q followed by one adder (range [0, 4q)), and feeds the multiplier
// instead of b in INTT mode. In NTT mode b' uses the corrected subtractor
// (mod_sub_corr), in INTT mode it is the multiplier output itself. All of this
// follows the paper's final butterfly; the register placement is this design's:
//   stage 1      register the multiplier operand (b or a-b+2q) and w;
//   stages 2..7  Montgomery multiplier (three DSP levels of two stages);
//   stage 8      add/div2, corrected subtract, output registers.
// a and b travel through matching delay registers. Latency is PE_LAT = 8
// cycles with one butterfly accepted per cycle.
//
// bypass = 1 makes the PE pass a and b unchanged with the same latency; the
// control unit uses it for the columns not needed in the last pass when the
// number of stages is not a multiple of the array depth (this design's own
// mechanism). W selects the multiplier: 17 (moduli up to 14 bits) or 34
// (moduli up to 31 bits). mu = -q**-1 mod 2**W.
module ntt_bfu #(
  parameter int unsigned W = 34
) (
  input  logic           clk,
  input  ntt_pkg::mode_e mode,
  input  logic           bypass,
  input  logic [W-1:0]   q,
  input  logic [W-1:0]   mu,
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  input  logic [W-1:0]   w,
  output logic [W-1:0]   a_o,
  output logic [W-1:0]   b_o
);
  localparam int unsigned DLY = ntt_pkg::PE_LAT - 1;   // 7

  // ---- stage 1: a - b + 2q through CSA + adder, operand select ------------
  logic [W-1:0] q2, cs_s, cs_c, sub2q, x_mul;
  always_comb begin
    q2    = q << 1;
    cs_s  = a ^ ~b ^ q2;
    cs_c  = ((a & ~b) | (a & q2) | (~b & q2)) << 1;
    sub2q = cs_s + cs_c + W'(1);     // a + ~b + 1 + 2q = a - b + 2q
    x_mul = (mode == ntt_pkg::MODE_NTT) ? b : sub2q;
  end

  logic [W-1:0] x_q, w_q;
  always_ff @(posedge clk) begin
    x_q <= x_mul;
    w_q <= w;
  end

  // ---- stages 2..7: Montgomery multiplier --------------------------------
  logic [W-1:0] m;
  if (W == 17) begin : g_mul17
    mont_mul_17 u_mul (.clk(clk), .a(x_q), .b(w_q), .q(q), .mu(mu), .r(m));
  end else if (W == 34) begin : g_mul34
    mont_mul_34 u_mul (.clk(clk), .a(x_q), .b(w_q), .q(q), .mu(mu), .r(m));
  end else begin : g_bad
    $error("ntt_bfu: W must be 17 or 34");
  end

  // ---- delay registers for a, b and the controls ---------------------------
  logic [DLY-1:0][W-1:0] a_sr, b_sr;
  ntt_pkg::mode_e        mode_sr [DLY];
  logic [DLY-1:0]        byp_sr;
  always_ff @(posedge clk) begin
    a_sr[0]    <= a;
    b_sr[0]    <= b;
    mode_sr[0] <= mode;
    byp_sr[0]  <= bypass;
    for (int i = 1; i < DLY; i++) begin
      a_sr[i]    <= a_sr[i-1];
      b_sr[i]    <= b_sr[i-1];
      mode_sr[i] <= mode_sr[i-1];
      byp_sr[i]  <= byp_sr[i-1];
    end
  end

  logic [W-1:0]   a_d, b_d;
  ntt_pkg::mode_e mode_d;
  assign a_d    = a_sr[DLY-1];
  assign b_d    = b_sr[DLY-1];
  assign mode_d = mode_sr[DLY-1];

  // ---- stage 8: adder with merged div2, corrected subtractor ---------------
  logic [W-1:0] add_in, a_new, sub_out, b_new;
  assign add_in = (mode_d == ntt_pkg::MODE_NTT) ? m : b_d;

  mod_add_div2 #(.W(W)) u_add (.mode(mode_d), .q(q), .x(a_d), .y(add_in), .out(a_new));
  mod_sub_corr #(.W(W)) u_sub (.q(q), .x(a_d), .y(m), .out(sub_out));
  assign b_new = (mode_d == ntt_pkg::MODE_NTT) ? sub_out : m;

  always_ff @(posedge clk) begin
    a_o <= byp_sr[DLY-1] ? a_d : a_new;
    b_o <= byp_sr[DLY-1] ? b_d : b_new;
  end
endmodule

// mont_mul_34 -- 34-bit Montgomery multiplier built hierarchically from
// eleven 17x17 DSP multipliers.
//
// Computes r = (a*b + q*[a*b*mu mod R]) / R with R = 2**34 and
// mu = -q**-1 mod R, without a final conditional subtraction. With the
// accelerator's redundant operand ranges (a < 4q, b < 2q, 8q < R) the result
// is below 2q. Moduli up to 31 bits are supported (31 + 3 redundancy bits).
//
// Structure, following the paper's hierarchical DSP mapping:
//  * level 1, m = a*b: four 17x17 DSP products a_i*b_j, aligned and summed by a
//    carry-save adder followed by one carry-propagate adder (68-bit m);
//  * level 2, p = [m*mu] mod 2**34: only three DSPs (lo*lo, lo*hi, hi*lo); the
//    hi*hi product lies entirely above 2**34 and is dropped together with its
//    carry-save logic;
//  * level 3, q*p + m: four DSPs, two of them in multiply-add mode absorbing
//    m[33:0] (weight 1) and m[67:34] (weight 2**34) in their post-adders, then
//    a carry-save and a carry-propagate adder. The result is bits [67:34].
// Which of the four level-3 DSPs takes which partial product is this design's
// reading of the drawing: the weights force p_lo*q_lo to take m[33:0] and
// p_hi*q_hi to take m[67:34]. Each DSP output is kept at 35 bits (34-bit
// product plus the post-adder carry) where the drawing prints 34.
//
// Timing: six pipeline stages (three DSP levels of two stages each). The
// carry-save/carry-propagate combining of a level is combinational between
// that level's output registers and the next level's input registers, and the
// final combining drives r combinationally. One result per cycle.
module mont_mul_34 (
  input  logic        clk,
  input  logic [33:0] a,
  input  logic [33:0] b,
  input  logic [33:0] q,
  input  logic [33:0] mu,
  output logic [33:0] r
);
  // ---- level 1: m = a*b -------------------------------------------------
  logic [34:0] ab_ll, ab_lh, ab_hl, ab_hh;
  dsp_mul u_ab_ll (.clk(clk), .x(a[16:0]),  .y(b[16:0]),  .z('0), .p(ab_ll));
  dsp_mul u_ab_lh (.clk(clk), .x(a[16:0]),  .y(b[33:17]), .z('0), .p(ab_lh));
  dsp_mul u_ab_hl (.clk(clk), .x(a[33:17]), .y(b[16:0]),  .z('0), .p(ab_hl));
  dsp_mul u_ab_hh (.clk(clk), .x(a[33:17]), .y(b[33:17]), .z('0), .p(ab_hh));

  // carry-save reduction of the four aligned partial products, then CPA
  logic [68:0] pp0, pp1, pp2, pp3, cs_s, cs_c, cs2_s, cs2_c, m_sum;
  always_comb begin
    pp0   = 69'(ab_ll[33:0]);
    pp1   = 69'(ab_lh[33:0]) << 17;
    pp2   = 69'(ab_hl[33:0]) << 17;
    pp3   = 69'(ab_hh[33:0]) << 34;
    cs_s  = pp0 ^ pp1 ^ pp2;
    cs_c  = ((pp0 & pp1) | (pp0 & pp2) | (pp1 & pp2)) << 1;
    cs2_s = cs_s ^ cs_c ^ pp3;
    cs2_c = ((cs_s & cs_c) | (cs_s & pp3) | (cs_c & pp3)) << 1;
    m_sum = cs2_s + cs2_c;
  end
  logic [67:0] m;
  assign m = m_sum[67:0];

  // ---- level 2: p = [m * mu] mod 2**34 (three DSPs) ----------------------
  logic [33:0] mu_d1, mu_d2;
  logic [33:0] q_d1, q_d2, q_d3, q_d4;
  logic [67:0] m_d1, m_d2;
  always_ff @(posedge clk) begin
    mu_d1 <= mu;  mu_d2 <= mu_d1;
    q_d1  <= q;   q_d2  <= q_d1;  q_d3 <= q_d2;  q_d4 <= q_d3;
    m_d1  <= m;   m_d2  <= m_d1;
  end

  logic [34:0] mu_ll, mu_lh, mu_hl;
  dsp_mul u_mu_ll (.clk(clk), .x(m[16:0]),  .y(mu_d2[16:0]),  .z('0), .p(mu_ll));
  dsp_mul u_mu_lh (.clk(clk), .x(m[16:0]),  .y(mu_d2[33:17]), .z('0), .p(mu_lh));
  dsp_mul u_mu_hl (.clk(clk), .x(m[33:17]), .y(mu_d2[16:0]),  .z('0), .p(mu_hl));

  logic [33:0] p;
  always_comb begin
    logic [33:0] s0, s1, s2, cs_sum, cs_car;
    s0     = mu_ll[33:0];
    s1     = 34'(mu_lh[16:0]) << 17;
    s2     = 34'(mu_hl[16:0]) << 17;
    cs_sum = s0 ^ s1 ^ s2;
    cs_car = ((s0 & s1) | (s0 & s2) | (s1 & s2)) << 1;
    p      = cs_sum + cs_car;                     // modulo 2**34 by width
  end

  // ---- level 3: q*p + m (two multiply-add DSPs) ----------------------------
  logic [34:0] qp_hl, qp_lh, qp_ll, qp_hh;
  dsp_mul u_qp_hl (.clk(clk), .x(p[33:17]), .y(q_d4[16:0]),  .z('0),         .p(qp_hl));
  dsp_mul u_qp_lh (.clk(clk), .x(p[16:0]),  .y(q_d4[33:17]), .z('0),         .p(qp_lh));
  dsp_mul u_qp_ll (.clk(clk), .x(p[16:0]),  .y(q_d4[16:0]),  .z(m_d2[33:0]),  .p(qp_ll));
  dsp_mul u_qp_hh (.clk(clk), .x(p[33:17]), .y(q_d4[33:17]), .z(m_d2[67:34]), .p(qp_hh));

  logic [69:0] t0, t1, t2, t3, ts, tc, t2s, t2c, s_sum;
  always_comb begin
    t0    = 70'(qp_ll);
    t1    = 70'(qp_hl) << 17;
    t2    = 70'(qp_lh) << 17;
    t3    = 70'(qp_hh) << 34;
    ts    = t0 ^ t1 ^ t2;
    tc    = ((t0 & t1) | (t0 & t2) | (t1 & t2)) << 1;
    t2s   = ts ^ tc ^ t3;
    t2c   = ((ts & tc) | (ts & t3) | (tc & t3)) << 1;
    s_sum = t2s + t2c;
  end
  assign r = s_sum[67:34];
endmodule

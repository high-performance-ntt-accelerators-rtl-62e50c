// mont_mul_17 -- 17-bit Montgomery multiplier mapped onto three DSP blocks.
//
// Computes r = (a*b + q*[a*b*mu mod R]) / R with R = 2**17 and
// mu = -q**-1 mod R, i.e. the Montgomery product a*b*R**-1 mod q, without any
// final conditional subtraction. With the accelerator's redundant operand
// ranges (a < 4q, b < 2q, 8q < R) the result is always below 2q, so it can be
// fed straight back into the datapath. Moduli up to 14 bits are supported.
//
// Structure (following the paper's three-DSP mapping): DSP 1 forms the 34-bit
// product m = a*b; DSP 2 multiplies the low 17 bits of m by mu and keeps the
// low 17 bits, p = [m*mu]_R; DSP 3 is a multiply-add forming p*q + m. The
// result is bits [33:17] of that sum. m is delayed two cycles to meet DSP 3.
// The mapping drawing prints both "[33:17]" and "[34:17]" for the result
// slice; since the sum is below 2*q*R < 2**33 here the two are the same value,
// and the 17 bits [33:17] are taken.
//
// Timing: operands are sampled on a clock edge and r is valid six edges later
// (three DSP levels of two stages each); r is combinational from the last
// DSP register. One result per cycle.
module mont_mul_17 (
  input  logic        clk,
  input  logic [16:0] a,
  input  logic [16:0] b,
  input  logic [16:0] q,
  input  logic [16:0] mu,
  output logic [16:0] r
);
  logic [34:0] m_full, p_full, s_full;
  logic [33:0] m_d1, m_d2;
  logic [16:0] q_d1, q_d2, q_d3, q_d4, mu_d1, mu_d2;

  // DSP 1: a*b
  dsp_mul #(.ZW(34), .PW(35)) u_dsp_ab (
    .clk(clk), .x(a), .y(b), .z('0), .p(m_full));

  // Operand alignment: mu used two cycles after a,b; q four cycles after.
  always_ff @(posedge clk) begin
    mu_d1 <= mu;  mu_d2 <= mu_d1;
    q_d1  <= q;   q_d2  <= q_d1;  q_d3 <= q_d2;  q_d4 <= q_d3;
    m_d1  <= m_full[33:0];
    m_d2  <= m_d1;
  end

  // DSP 2: p = [m * mu] mod 2**17
  dsp_mul #(.ZW(34), .PW(35)) u_dsp_mu (
    .clk(clk), .x(m_full[16:0]), .y(mu_d2), .z('0), .p(p_full));

  // DSP 3: p*q + m
  dsp_mul #(.ZW(34), .PW(35)) u_dsp_qp (
    .clk(clk), .x(p_full[16:0]), .y(q_d4), .z(m_d2), .p(s_full));

  assign r = s_full[33:17];
endmodule

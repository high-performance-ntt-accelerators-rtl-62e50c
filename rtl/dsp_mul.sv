// dsp_mul -- one DSP-sized multiplier: p = x * y + z on 17-bit unsigned
// operands, with two pipeline stages.
//
// This is the unit the Montgomery multipliers are built from. Seventeen-bit
// unsigned operands fit the signed 25x18 multiplier of an FPGA DSP slice, and
// the optional z input uses the slice's post-adder (the "x*y+z" DSPs of the
// mapping drawings); tie z to zero for a plain "x*y" DSP. Two register stages
// follow the paper's choice of configuring every DSP block with two pipeline
// stages: stage 1 registers the operands, stage 2 registers the result.
//
// Interface: x, y (17 bits), z (ZW bits) are sampled on a rising clk edge and
// p = x*y+z appears two edges later. PW must hold the full result; 35 bits
// cover a 34-bit z plus a 34-bit product. There is no reset: the unit is a
// pure pipeline whose stale contents are never flagged valid.
module dsp_mul #(
  parameter int unsigned ZW = 34,
  parameter int unsigned PW = 35
) (
  input  logic                         clk,
  input  logic [ntt_pkg::DSP_W-1:0]    x,
  input  logic [ntt_pkg::DSP_W-1:0]    y,
  input  logic [ZW-1:0]                z,
  output logic [PW-1:0]                p
);
  localparam int unsigned W = ntt_pkg::DSP_W;

  logic [W-1:0]  x_q, y_q;
  logic [ZW-1:0] z_q;

  always_ff @(posedge clk) begin
    x_q <= x;
    y_q <= y;
    z_q <= z;
    p   <= PW'(x_q) * PW'(y_q) + PW'(z_q);
  end
endmodule

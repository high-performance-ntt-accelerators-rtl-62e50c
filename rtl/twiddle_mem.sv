// twiddle_mem -- loadable twiddle-factor memory with one read port per PE.
//
// The twiddle factors are computed offline for the chosen modulus and loaded
// through the write port whenever the modulus changes; no twiddle is generated
// on chip. The memory holds two tables of N entries each, in Montgomery form:
// addresses 0 .. N-1 the forward-transform table and N .. 2N-1 the inverse
// table, whose entries are already divided by two (this removes the INTT
// scaling unit in front of the multiplier). Entry j of a table (1 <= j < N) is
// the twiddle of the butterflies whose two indices differ in bit position
// pos, in block k = index >> (pos+1), with j = 2**(LOGN-1-pos) + k; this is
// the usual per-stage ordering of twiddle tables, chosen here.
//
// To serve every PE every cycle the table is replicated once per read port
// (PORTS = w*d); all copies are written together. Reads are synchronous: data
// one cycle after the address. Table layout and replication are this design's
// choices; the paper only states that the table is loaded from outside.
module twiddle_mem #(
  parameter int unsigned W     = 34,
  parameter int unsigned LOGN  = 10,
  parameter int unsigned PORTS = 16
) (
  input  logic                        clk,
  input  logic                        we,
  input  logic [LOGN:0]               waddr,
  input  logic [W-1:0]                wdata,
  input  logic [PORTS-1:0][LOGN:0]    raddr,
  output logic [PORTS-1:0][W-1:0]     rdata
);
  localparam int unsigned DEPTH = 2 << LOGN;

  for (genvar p = 0; p < PORTS; p++) begin : g_copy
    logic [W-1:0] tab [DEPTH];
    always_ff @(posedge clk) begin
      if (we) tab[waddr] <= wdata;
      rdata[p] <= tab[raddr[p]];
    end
  end
endmodule

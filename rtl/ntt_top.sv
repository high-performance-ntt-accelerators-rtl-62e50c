// ntt_top -- parallel iterative NTT/INTT accelerator for lattice-based PQC.
//
// A ROWS x COLS array of unified butterfly PEs (pe_array) works through an
// N-point forward or inverse number theoretic transform in ceil(LOGN/COLS)
// passes, reading 2*ROWS coefficients per cycle from a 2*ROWS-bank coefficient
// memory (coeff_mem), applying COLS stages, and writing the results back in
// place. The control unit (ntt_ctrl) generates the indices and twiddle
// addresses; the twiddle memory (twiddle_mem) serves every PE every cycle.
//
// Number format. All coefficients and twiddles are in Montgomery form
// (x*R mod q, R = 2**W) and may use the redundant range [0, 2q): the host
// converts to and from this form and reduces results to [0, q) if it needs
// canonical values. W = 34 handles moduli up to 31 bits (e.g. ML-DSA's
// q = 8380417), W = 17 moduli up to 14 bits (ML-KEM, Falcon). The modulus is
// programmable at run time: q and mu = -q**-1 mod 2**W are inputs, and the
// twiddle tables for the new modulus are loaded through tw_*.
//
// Transform conventions. Forward (mode = MODE_NTT): Cooley-Tukey butterflies
// a' = a + w*b, b' = a - w*b on natural-order input, bit-reversed output.
// Inverse (mode = MODE_INTT): Gentleman-Sande butterflies a' = (a+b)/2,
// b' = (a-b)*w/2 on bit-reversed input, natural-order output, so the 1/N
// scaling is complete at the end with no separate pass. Which root (cyclic or
// negacyclic) the transform uses is decided only by the loaded tables.
//
// Operation: while busy is low, load coefficients (h_we, h_idx, h_wdata; the
// word index is the coefficient index) and twiddles; after reset every
// coefficient must be written once before the first start. Pulse start with
// mode; done pulses when the last result is written; read results through
// h_idx/h_rdata (one cycle latency). cycles reports the transform's cycle
// count; stall is high in the cycles the control unit holds an issue back.
// Default sizes: N = 1024, 8 x 2 PEs, W = 34: 5 passes of 64 cycles plus the
// 17-cycle pipeline and 2 stall cycles = 339 cycles for a forward transform.
module ntt_top #(
  parameter int unsigned W    = 34,
  parameter int unsigned LOGN = 10,
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  // transform control
  input  logic               start,
  input  ntt_pkg::mode_e     mode,
  input  logic [W-1:0]       q,
  input  logic [W-1:0]       mu,
  output logic               busy,
  output logic               done,
  output logic [31:0]        cycles,
  output logic               stall,
  // host access to the coefficients
  input  logic               h_we,
  input  logic [LOGN-1:0]    h_idx,
  input  logic [W-1:0]       h_wdata,
  output logic [W-1:0]       h_rdata,
  // twiddle table loading
  input  logic               tw_we,
  input  logic [LOGN:0]      tw_waddr,
  input  logic [W-1:0]       tw_wdata
);
  localparam int unsigned LANES = 2 * ROWS;

  logic                              rd_en, rd_tag, rd_ready, wr_en, wr_tag, h_wtag;
  logic [LANES-1:0][LOGN-1:0]        rd_idx, wr_idx;
  logic [LANES-1:0][W-1:0]           rd_data, wr_data;
  ntt_pkg::mode_e                    pe_mode;
  logic [COLS-1:0]                   pe_byp;
  logic [COLS-1:0][ROWS-1:0][LOGN:0] tw_addr;
  logic [COLS-1:0][ROWS-1:0][W-1:0]  tw_data;

  ntt_ctrl #(.LOGN(LOGN), .ROWS(ROWS), .COLS(COLS)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .mode_in(mode),
    .busy(busy), .done(done), .cycles(cycles), .stall(stall),
    .rd_en(rd_en), .rd_idx(rd_idx), .rd_tag(rd_tag), .rd_ready(rd_ready),
    .wr_en(wr_en), .wr_idx(wr_idx), .wr_tag(wr_tag), .h_wtag(h_wtag),
    .pe_mode(pe_mode), .pe_byp(pe_byp), .tw_addr(tw_addr));

  coeff_mem #(.W(W), .LOGN(LOGN), .LANES(LANES)) u_cmem (
    .clk(clk),
    .rd_en(rd_en), .rd_idx(rd_idx), .rd_tag(rd_tag), .rd_ready(rd_ready), .rd_data(rd_data),
    .wr_en(wr_en), .wr_idx(wr_idx), .wr_data(wr_data), .wr_tag(wr_tag),
    .h_we(h_we && !busy), .h_idx(h_idx), .h_wdata(h_wdata), .h_wtag(h_wtag), .h_rdata(h_rdata));

  twiddle_mem #(.W(W), .LOGN(LOGN), .PORTS(COLS*ROWS)) u_tw (
    .clk(clk), .we(tw_we), .waddr(tw_waddr), .wdata(tw_wdata),
    .raddr(tw_addr), .rdata(tw_data));

  pe_array #(.W(W), .ROWS(ROWS), .COLS(COLS)) u_pe (
    .clk(clk), .mode(pe_mode), .byp(pe_byp), .q(q), .mu(mu),
    .din(rd_data), .tw(tw_data), .dout(wr_data));
endmodule

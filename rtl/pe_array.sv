// pe_array -- ROWS x COLS grid of unified butterfly PEs with a butterfly
// interconnect between columns.
//
// Data flows left to right only; PEs of the same column do not talk to each
// other. One pass through the array applies COLS consecutive transform stages
// to 2*ROWS coefficients. The rows form groups of G = 2**(COLS-1) PEs, each
// group holding 2**COLS coefficients ("elements" e = 0 .. 2**COLS-1). Column t
// pairs the two elements that differ in bit COLS-1-t of e: PE g of the group
// gets the element with that bit 0 on port a and the one with that bit 1 on
// port b, where g is e with that bit removed. Between columns t and t+1 each
// element is therefore routed from (g = e without bit COLS-1-t, port = that
// bit) to (g = e without bit COLS-2-t, port = that bit). For a 4 x 2 array
// this is exactly the connection pattern drawn in the paper: PE(0,0) feeds
// PE(0,1) and PE(1,1), PE(1,0) feeds PE(0,1) and PE(1,1), and likewise for
// rows 2 and 3. The general rule for larger arrays is this design's
// extrapolation of that drawing.
//
// Interface and timing:
//  din   lane l = 2r+k is port k (0 = a, 1 = b) of PE(r, 0): element
//        e = k*G + (r mod G) of group r / G;
//  dout  lane l = 2r+k is port k of PE(r, COLS-1): element 2*(r mod G) + k;
//  tw    twiddle of PE(r, t), presented in the same cycle as that column's
//        inputs, i.e. t*PE_LAT cycles after din;
//  mode, byp  presented with din; the array delays them by t*PE_LAT for
//        column t so that passes may follow each other back to back.
// dout appears COLS*PE_LAT cycles after din.
module pe_array #(
  parameter int unsigned W    = 34,
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 2
) (
  input  logic                            clk,
  input  ntt_pkg::mode_e                  mode,
  input  logic [COLS-1:0]                 byp,
  input  logic [W-1:0]                    q,
  input  logic [W-1:0]                    mu,
  input  logic [2*ROWS-1:0][W-1:0]        din,
  input  logic [COLS-1:0][ROWS-1:0][W-1:0] tw,
  output logic [2*ROWS-1:0][W-1:0]        dout
);
  localparam int unsigned LAT = ntt_pkg::PE_LAT;
  localparam int unsigned G   = 1 << (COLS - 1);
  localparam int unsigned NG  = ROWS / G;

  // remove bit p from value v
  function automatic int unsigned rm_bit(input int unsigned v, input int unsigned p);
    return ((v >> (p + 1)) << p) | (v & ((1 << p) - 1));
  endfunction

  // column inputs/outputs: [col][row][port]
  logic [W-1:0] cin  [COLS][ROWS][2];
  logic [W-1:0] cout [COLS][ROWS][2];

  // per-column control, delayed t*LAT cycles
  ntt_pkg::mode_e  mode_c [COLS];
  logic            byp_c  [COLS];
  assign mode_c[0] = mode;
  assign byp_c[0]  = byp[0];

  for (genvar t = 1; t < COLS; t++) begin : g_ctl
    ntt_pkg::mode_e   m_sr [t*LAT];
    logic [COLS-1:0]  b_sr [t*LAT];
    always_ff @(posedge clk) begin
      m_sr[0] <= mode;
      b_sr[0] <= byp;
      for (int i = 1; i < t*LAT; i++) begin
        m_sr[i] <= m_sr[i-1];
        b_sr[i] <= b_sr[i-1];
      end
    end
    assign mode_c[t] = m_sr[t*LAT-1];
    assign byp_c[t]  = b_sr[t*LAT-1][t];
  end

  // column 0 inputs from the lanes
  for (genvar r = 0; r < ROWS; r++) begin : g_in
    assign cin[0][r][0] = din[2*r];
    assign cin[0][r][1] = din[2*r+1];
  end

  // PEs
  for (genvar t = 0; t < COLS; t++) begin : g_col
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      ntt_bfu #(.W(W)) u_pe (
        .clk(clk), .mode(mode_c[t]), .bypass(byp_c[t]), .q(q), .mu(mu),
        .a(cin[t][r][0]), .b(cin[t][r][1]), .w(tw[t][r]),
        .a_o(cout[t][r][0]), .b_o(cout[t][r][1]));
    end
  end

  // butterfly interconnect between columns t and t+1
  for (genvar t = 0; t + 1 < COLS; t++) begin : g_link
    for (genvar grp = 0; grp < NG; grp++) begin : g_grp
      for (genvar e = 0; e < 2*G; e++) begin : g_el
        localparam int unsigned SB = COLS - 1 - t;   // bit paired in column t
        localparam int unsigned DB = COLS - 2 - t;   // bit paired in column t+1
        localparam int unsigned SG = rm_bit(e, SB);
        localparam int unsigned SK = (e >> SB) & 1;
        localparam int unsigned DG = rm_bit(e, DB);
        localparam int unsigned DK = (e >> DB) & 1;
        assign cin[t+1][grp*G + DG][DK] = cout[t][grp*G + SG][SK];
      end
    end
  end

  // last column outputs to the lanes
  for (genvar r = 0; r < ROWS; r++) begin : g_out
    assign dout[2*r]   = cout[COLS-1][r][0];
    assign dout[2*r+1] = cout[COLS-1][r][1];
  end
endmodule

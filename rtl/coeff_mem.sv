// coeff_mem -- banked coefficient memory with a conflict-free index mapping
// and lane crossbars.
//
// LANES = 2*w banks of N/LANES words each hold the N transform coefficients in
// place. Coefficient index i lives in bank ntt_pkg::bank_of(i) (XOR of the
// LOGB-bit chunks of i) at address i >> LOGB. Every set of LANES coefficients
// the control unit reads or writes in one cycle differs only in LOGB
// consecutive index bits and so touches each bank exactly once; assertions
// check this. The read crossbar steers each lane's address to its bank and
// each bank's word back to its lane; the write crossbar does the reverse.
//
// Each word carries a one-bit tag naming the parity of the pass that last
// wrote it. rd_ready reports whether every word addressed by rd_idx carries
// the tag rd_tag; the control unit stalls on it to avoid reading a coefficient
// before the previous pass has written it back. Banking and the interleaving
// are named in the paper; the mapping, the crossbars and the tag scheme are
// this design's own.
//
// Timing: reads are synchronous (rd_data one cycle after rd_en/rd_idx), writes
// take effect at the clock edge, rd_ready is combinational. The host port
// (h_*) reaches a single coefficient and is only to be used while the lane
// ports are idle; it has the same one-cycle read latency.
module coeff_mem #(
  parameter int unsigned W     = 34,
  parameter int unsigned LOGN  = 10,
  parameter int unsigned LANES = 16
) (
  input  logic                          clk,
  // lane read port
  input  logic                          rd_en,
  input  logic [LANES-1:0][LOGN-1:0]    rd_idx,
  input  logic                          rd_tag,
  output logic                          rd_ready,
  output logic [LANES-1:0][W-1:0]       rd_data,
  // lane write port
  input  logic                          wr_en,
  input  logic [LANES-1:0][LOGN-1:0]    wr_idx,
  input  logic [LANES-1:0][W-1:0]       wr_data,
  input  logic                          wr_tag,
  // host port
  input  logic                          h_we,
  input  logic [LOGN-1:0]               h_idx,
  input  logic [W-1:0]                  h_wdata,
  input  logic                          h_wtag,
  output logic [W-1:0]                  h_rdata
);
  localparam int unsigned LOGB  = $clog2(LANES);
  localparam int unsigned DEPTH = (1 << LOGN) / LANES;
  localparam int unsigned AW    = LOGN - LOGB;

  typedef logic [LOGB-1:0] bank_t;
  typedef logic [AW-1:0]   addr_t;

  function automatic bank_t f_bank(input logic [LOGN-1:0] i);
    return bank_t'(ntt_pkg::bank_of(int'(i), LOGN, LOGB));
  endfunction
  function automatic addr_t f_addr(input logic [LOGN-1:0] i);
    return addr_t'(i >> LOGB);
  endfunction

  logic [W-1:0] mem [LANES][DEPTH];
  logic         tag [LANES][DEPTH];

  // ---- lane to bank steering ------------------------------------------
  bank_t rd_bank [LANES];
  bank_t wr_bank [LANES];
  addr_t b_raddr [LANES];
  logic  b_we    [LANES];
  addr_t b_waddr [LANES];
  logic [W-1:0] b_wdata [LANES];
  logic  b_wtag  [LANES];
  logic [LANES-1:0] rd_hit, wr_hit;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      rd_bank[l] = f_bank(rd_idx[l]);
      wr_bank[l] = f_bank(wr_idx[l]);
    end
    for (int k = 0; k < LANES; k++) begin
      b_raddr[k] = f_addr(h_idx);
      b_we[k]    = 1'b0;
      b_waddr[k] = f_addr(h_idx);
      b_wdata[k] = h_wdata;
      b_wtag[k]  = h_wtag;
      if (h_we && f_bank(h_idx) == bank_t'(k)) b_we[k] = 1'b1;
      for (int l = 0; l < LANES; l++) begin
        if (rd_en && rd_bank[l] == bank_t'(k)) b_raddr[k] = f_addr(rd_idx[l]);
        if (wr_en && wr_bank[l] == bank_t'(k)) begin
          b_we[k]    = 1'b1;
          b_waddr[k] = f_addr(wr_idx[l]);
          b_wdata[k] = wr_data[l];
          b_wtag[k]  = wr_tag;
        end
      end
    end
    // readiness: every addressed word carries the expected tag
    rd_ready = 1'b1;
    for (int l = 0; l < LANES; l++)
      if (tag[rd_bank[l]][f_addr(rd_idx[l])] != rd_tag) rd_ready = 1'b0;
    // conflict detection for the assertions: one lane per bank
    rd_hit = '0;
    wr_hit = '0;
    for (int l = 0; l < LANES; l++) begin
      rd_hit[rd_bank[l]] = 1'b1;
      wr_hit[wr_bank[l]] = 1'b1;
    end
  end

  // ---- banks ------------------------------------------------------------
  logic [W-1:0] b_q [LANES];
  always_ff @(posedge clk) begin
    for (int k = 0; k < LANES; k++) begin
      if (b_we[k]) begin
        mem[k][b_waddr[k]] <= b_wdata[k];
        tag[k][b_waddr[k]] <= b_wtag[k];
      end
      b_q[k] <= mem[k][b_raddr[k]];
    end
  end

  // ---- bank to lane steering (one cycle later) ---------------------------
  bank_t rd_bank_q [LANES];
  bank_t h_bank_q;
  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) rd_bank_q[l] <= rd_bank[l];
    h_bank_q <= f_bank(h_idx);
  end
  always_comb begin
    for (int l = 0; l < LANES; l++) rd_data[l] = b_q[rd_bank_q[l]];
    h_rdata = b_q[h_bank_q];
  end

  // ---- access rules --------------------------------------------------------
  always_ff @(posedge clk) begin
    if (rd_en) assert (&rd_hit) else $error("coeff_mem: bank conflict on read");
    if (wr_en) assert (&wr_hit) else $error("coeff_mem: bank conflict on write");
    if (h_we)  assert (!wr_en)  else $error("coeff_mem: host write during transform");
  end
endmodule

// ntt_ctrl -- control unit of the iterative NTT/INTT accelerator.
//
// A transform of N = 2**LOGN points runs as NPASS = ceil(LOGN/COLS) passes.
// Each pass streams all N coefficients once through the ROWS x COLS PE array,
// LANES = 2*ROWS per cycle, so that the COLS columns apply COLS consecutive
// stages; a pass takes N/LANES issue cycles. In the last pass, when LOGN is
// not a multiple of COLS, the columns not needed are put in bypass.
//
// Index generation. A stage pairs coefficients whose indices differ in one
// bit: bit LOGN-1-s for forward stage s (Cooley-Tukey order: natural-order
// input, bit-reversed output) and bit s for inverse stage s (Gentleman-Sande
// order: bit-reversed input, natural-order output). For each pass the unit
// picks a window of LOGB = log2(LANES) consecutive index bits that contains
// the pass's butterfly bits; the window bits vary across the lanes of one
// cycle, the other LOGN-LOGB bits come from a cycle counter (in ascending bit
// order). Because the window bits are consecutive, the coefficient memory's
// XOR bank mapping puts the lanes into distinct banks in every pass. The
// window bits are assigned as: slots 0..COLS-1 to the element bits paired by
// columns 0..COLS-1 (the butterfly bits first), the rest to the group number
// of the row (see pe_array for lane, row and element numbering).
//
// Twiddles. For column t the unit derives, from the index i0 of the element
// on port a of each PE, the twiddle address 2**(LOGN-1-pos) + (i0 >> (pos+1))
// in the forward or inverse table (pos = the bit paired), delays it t*PE_LAT
// cycles and sends it to that PE's port of the twiddle memory.
//
// Hazards. Passes follow back to back. A coefficient must not be read before
// the previous pass has written it back (1 + COLS*PE_LAT cycles after its
// read). Every word carries the parity of the pass that wrote it; the unit
// only issues when all LANES words carry the parity of the previous pass,
// otherwise it stalls one cycle (stall = 1). With the default sizes
// (N = 1024, 8 x 2 PEs) this costs two cycles per forward transform.
// The paper adopts a published conflict-free, bubble-free schedule that it
// does not describe; this window/counter schedule with stalls is this
// design's own replacement.
//
// Interface: start (one cycle, while !busy) with mode latched; busy is high
// until done pulses, one cycle after the last write-back. cycles counts the
// cycles from the first issue cycle to the last write-back inclusive.
// Read requests go out as coefficient indices (rd_idx, per lane); read data
// is expected one cycle later at the PE array, together with pe_mode/pe_byp.
// Write-back indices (wr_idx) and enable follow 1 + COLS*PE_LAT cycles after
// the issue. h_wtag is the tag host writes must carry.
module ntt_ctrl #(
  parameter int unsigned LOGN = 10,
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 2
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  input  ntt_pkg::mode_e                     mode_in,
  output logic                               busy,
  output logic                               done,
  output logic [31:0]                        cycles,
  output logic                               stall,
  // coefficient memory
  output logic                               rd_en,
  output logic [2*ROWS-1:0][LOGN-1:0]        rd_idx,
  output logic                               rd_tag,
  input  logic                               rd_ready,
  output logic                               wr_en,
  output logic [2*ROWS-1:0][LOGN-1:0]        wr_idx,
  output logic                               wr_tag,
  output logic                               h_wtag,
  // PE array and twiddle memory
  output ntt_pkg::mode_e                     pe_mode,
  output logic [COLS-1:0]                    pe_byp,
  output logic [COLS-1:0][ROWS-1:0][LOGN:0]  tw_addr
);
  localparam int unsigned LANES = 2 * ROWS;
  localparam int unsigned LOGB  = $clog2(LANES);
  localparam int unsigned NC    = LOGN - LOGB;             // counter bits
  localparam int unsigned NPASS = (LOGN + COLS - 1) / COLS;
  localparam int unsigned G     = 1 << (COLS - 1);
  localparam int unsigned LAT   = ntt_pkg::PE_LAT;
  localparam int unsigned WB    = 1 + COLS * LAT;          // issue -> write-back
  localparam int unsigned IW    = $clog2(LOGN);
  localparam int unsigned PW    = (NPASS > 1) ? $clog2(NPASS) : 1;
  localparam int unsigned DW    = $clog2(COLS + 1);

  initial begin
    assert (NC >= 1)        else $error("ntt_ctrl: N must exceed 2*ROWS");
    assert (COLS <= LOGB)   else $error("ntt_ctrl: COLS must not exceed log2(ROWS)+1");
    assert ((1 << LOGB) == LANES) else $error("ntt_ctrl: ROWS must be a power of two");
  end

  typedef struct packed {
    logic [LOGB-1:0][IW-1:0] pos;    // window slot -> index bit
    logic [NC-1:0][IW-1:0]   cpos;   // counter bit -> index bit
    logic [DW-1:0]           dact;   // active columns in this pass
  } plan_t;

  // Window and counter bit assignment of pass p.
  function automatic plan_t plan_pass(input logic ntt, input int unsigned p);
    plan_t       pl;
    int unsigned s, dd, wlo, n;
    logic [LOGN-1:0] used;
    s  = p * COLS;
    dd = (LOGN - s < COLS) ? LOGN - s : COLS;
    used = '0;
    pl   = '0;
    if (ntt) wlo = (LOGN - s >= LOGB) ? LOGN - s - LOGB : 0;
    else     wlo = (s < LOGN - LOGB) ? s : LOGN - LOGB;
    for (int unsigned t = 0; t < COLS; t++)
      if (t < dd) begin
        pl.pos[t] = IW'(ntt ? LOGN - 1 - s - t : s + t);
        used[pl.pos[t]] = 1'b1;
      end
    n = dd;
    for (int unsigned j = 0; j < LOGN; j++)
      if (j >= wlo && j < wlo + LOGB && !used[j]) begin
        pl.pos[n] = IW'(j);
        n++;
      end
    n = 0;
    for (int unsigned j = 0; j < LOGN; j++)
      if (!(j >= wlo && j < wlo + LOGB)) begin
        pl.cpos[n] = IW'(j);
        n++;
      end
    pl.dact = DW'(dd);
    return pl;
  endfunction

  // Coefficient index of element e of group grp at counter value c.
  function automatic logic [LOGN-1:0] coef_idx(input plan_t pl, input int unsigned e,
                                               input int unsigned grp,
                                               input logic [NC-1:0] c);
    logic [LOGN-1:0] i;
    i = '0;
    for (int unsigned t = 0; t < COLS; t++) i[pl.pos[t]] = 1'((e >> (COLS - 1 - t)) & 1);
    for (int unsigned j = COLS; j < LOGB; j++) i[pl.pos[j]] = 1'((grp >> (j - COLS)) & 1);
    for (int unsigned j = 0; j < NC; j++) i[pl.cpos[j]] = c[j];
    return i;
  endfunction

  // ---- sequencing -----------------------------------------------------------
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e          state;
  ntt_pkg::mode_e  mode;
  logic [PW-1:0]   pass;
  logic [NC-1:0]   cnt;
  logic            ep;         // parity of the current (or next) pass
  logic [$clog2(WB+1)-1:0] drain;
  logic            issue;
  plan_t           pl;

  assign pl     = plan_pass(mode == ntt_pkg::MODE_NTT, int'(pass));
  assign rd_en  = (state == S_RUN);
  assign rd_tag = ~ep;
  assign h_wtag = ~ep;
  assign issue  = (state == S_RUN) && rd_ready;
  assign stall  = (state == S_RUN) && !rd_ready;
  assign busy   = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      mode   <= ntt_pkg::MODE_NTT;
      pass   <= '0;
      cnt    <= '0;
      ep     <= 1'b0;
      drain  <= '0;
      done   <= 1'b0;
      cycles <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state  <= S_RUN;
          mode   <= mode_in;
          pass   <= '0;
          cnt    <= '0;
          cycles <= '0;
        end
        S_RUN: begin
          cycles <= cycles + 1;
          if (issue) begin
            cnt <= cnt + 1'b1;
            if (&cnt) begin
              ep <= ~ep;
              if (int'(pass) == NPASS - 1) begin
                state <= S_DRAIN;
                drain <= '0;
              end else begin
                pass <= pass + 1'b1;
              end
            end
          end
        end
        S_DRAIN: begin
          cycles <= cycles + 1;
          drain  <= drain + 1'b1;
          if (int'(drain) == WB - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---- per-cycle index and twiddle address generation ------------------------
  logic [LANES-1:0][LOGN-1:0]       out_idx;
  logic [COLS-1:0][ROWS-1:0][LOGN:0] tw_now;
  logic [COLS-1:0]                   byp_now;
  always_comb begin
    for (int unsigned l = 0; l < LANES; l++) begin
      int unsigned r, k, g, grp;
      r = l >> 1;  k = l & 1;  g = r % G;  grp = r / G;
      rd_idx[l]  = coef_idx(pl, k * G + g, grp, cnt);
      out_idx[l] = coef_idx(pl, 2 * g + k, grp, cnt);
    end
    for (int unsigned t = 0; t < COLS; t++) begin
      int unsigned sb, p;
      byp_now[t] = (DW'(t) >= pl.dact);
      sb = COLS - 1 - t;
      p  = int'(pl.pos[t]);
      for (int unsigned r = 0; r < ROWS; r++) begin
        int unsigned g, grp, e0;
        logic [LOGN-1:0] i0;
        logic [LOGN-1:0] j;
        g   = r % G;  grp = r / G;
        e0  = ((g >> sb) << (sb + 1)) | (g & ((1 << sb) - 1));
        i0  = coef_idx(pl, e0, grp, cnt);
        j   = LOGN'(1 << (LOGN - 1 - p)) | LOGN'(i0 >> (p + 1));
        tw_now[t][r] = {mode == ntt_pkg::MODE_INTT, j};
      end
    end
  end

  // ---- alignment delays -----------------------------------------------------
  // PE controls: one cycle (memory read latency)
  always_ff @(posedge clk) begin
    pe_mode <= mode;
    pe_byp  <= byp_now;
  end

  // twiddle addresses: column t delayed t*LAT cycles
  assign tw_addr[0] = tw_now[0];
  for (genvar t = 1; t < COLS; t++) begin : g_twd
    logic [ROWS-1:0][LOGN:0] sr [t*LAT];
    always_ff @(posedge clk) begin
      sr[0] <= tw_now[t];
      for (int i = 1; i < t*LAT; i++) sr[i] <= sr[i-1];
    end
    assign tw_addr[t] = sr[t*LAT-1];
  end

  // write-back: indices, enable and tag delayed WB cycles
  logic [LANES-1:0][LOGN-1:0] wi_sr [WB];
  logic [WB-1:0]              we_sr;
  logic [WB-1:0]              wt_sr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) we_sr <= '0;
    else        we_sr <= {we_sr[WB-2:0], issue};
  end
  always_ff @(posedge clk) begin
    wi_sr[0] <= out_idx;
    wt_sr    <= {wt_sr[WB-2:0], ep};
    for (int i = 1; i < WB; i++) wi_sr[i] <= wi_sr[i-1];
  end
  assign wr_en  = we_sr[WB-1];
  assign wr_idx = wi_sr[WB-1];
  assign wr_tag = wt_sr[WB-1];
endmodule

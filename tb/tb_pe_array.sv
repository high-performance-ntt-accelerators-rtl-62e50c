// tb_pe_array -- checks the PE array at its default size (8 x 2, 34 bits)
// against a model built from the bit-exact butterfly model and the
// interconnect rule: within each group of 2**COLS elements, column t pairs
// the elements that differ in bit COLS-1-t. A new random vector of 2*ROWS
// coefficients enters every cycle with random mode and per-column bypass;
// the twiddles of column t are driven t*8 cycles after the vector, as the
// controller does. Every output vector must match the model exactly
// COLS*8 = 16 cycles after its input (latency check).
module tb_pe_array;
  localparam int unsigned W = 34, ROWS = 8, COLS = 2, LAT = 8 * COLS, NVEC = 3000;
  localparam int unsigned G = 1 << (COLS - 1), L = 2 * ROWS;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0, n_byp = 0, n_ntt = 0, n_intt = 0;

  `include "bfu_ref.svh"

  ntt_pkg::mode_e mode = ntt_pkg::MODE_NTT;
  logic [COLS-1:0] byp = '0;
  logic [W-1:0] q = W'(8380417), mu = '0;
  logic [L-1:0][W-1:0] din = '0, dout;
  logic [COLS-1:0][ROWS-1:0][W-1:0] tw = '0;

  pe_array #(.W(W), .ROWS(ROWS), .COLS(COLS)) dut (.*);

  // per-vector stimulus and expectation
  wide_t v_in [NVEC][L];
  wide_t v_tw [NVEC][COLS][ROWS];
  wide_t v_exp [NVEC][L];

  function automatic int unsigned ins_bit(int unsigned v, int unsigned p, int unsigned b);
    return ((v >> p) << (p + 1)) | (b << p) | (v & ((1 << p) - 1));
  endfunction

  task automatic model(input int k, input bit ntt, input logic [COLS-1:0] bp);
    wide_t el [ROWS / G][2 * G];
    for (int unsigned r = 0; r < ROWS; r++)
      for (int unsigned kk = 0; kk < 2; kk++)
        el[r / G][kk * G + r % G] = v_in[k][2 * r + kk];
    for (int unsigned t = 0; t < COLS; t++)
      for (int unsigned grp = 0; grp < ROWS / G; grp++)
        for (int unsigned g = 0; g < G; g++) begin
          int unsigned e0 = ins_bit(g, COLS - 1 - t, 0), e1 = ins_bit(g, COLS - 1 - t, 1);
          ref_bfu(ntt, bp[t], q, mu, W, el[grp][e0], el[grp][e1],
                  v_tw[k][t][grp * G + g], el[grp][e0], el[grp][e1]);
        end
    for (int unsigned r = 0; r < ROWS; r++)
      for (int unsigned kk = 0; kk < 2; kk++)
        v_exp[k][2 * r + kk] = el[r / G][2 * (r % G) + kk];
  endtask

  initial begin
    #2000000 $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    bit ok;
    mu = W'(ref_neg_inv(wide_t'(q), W));
    for (int k = 0; k < NVEC + LAT; k++) begin
      @(negedge clk);
      if (k >= LAT) begin
        ok = 1'b1;
        for (int l = 0; l < L; l++) ok &= (dout[l] == W'(v_exp[k-LAT][l]));
        checks++;
        if (!ok) begin
          failures++;
          if (failures < 5) $display("FAIL: vector %0d lane0 %0d exp %0d", k-LAT, dout[0], v_exp[k-LAT][0]);
        end
      end
      if (k < NVEC) begin
        // mode is kept for 64-vector blocks, as within a transform
        mode = ((k / 64) % 2 == 0) ? ntt_pkg::MODE_NTT : ntt_pkg::MODE_INTT;
        byp  = ($urandom % 4 == 0) ? COLS'($urandom) : '0;
        if (byp != 0) n_byp++; else if (mode == ntt_pkg::MODE_NTT) n_ntt++; else n_intt++;
        for (int l = 0; l < L; l++) begin
          v_in[k][l] = wide_t'({$urandom, $urandom} % (64'(q) * 2));
          din[l] = W'(v_in[k][l]);
        end
        for (int t = 0; t < COLS; t++)
          for (int r = 0; r < ROWS; r++) v_tw[k][t][r] = wide_t'($urandom % q);
        model(k, mode == ntt_pkg::MODE_NTT, byp);
      end
      // twiddles of column t belong to the vector that entered t*8 cycles ago
      for (int t = 0; t < COLS; t++)
        for (int r = 0; r < ROWS; r++)
          tw[t][r] = (k - 8 * t >= 0 && k - 8 * t < NVEC) ? W'(v_tw[k - 8 * t][t][r]) : '0;
    end
    checks++;
    if (!(n_byp > 0 && n_ntt > 0 && n_intt > 0)) begin
      failures++; $display("FAIL: not all of NTT, INTT, bypass exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ntt_ctrl -- checks the control unit alone at its default size
// (N = 1024, 8 x 2 PEs). The testbench models the coefficient memory's
// per-word tags (rd_ready = all addressed tags equal rd_tag; wr_en writes
// wr_tag) and checks, for a forward and an inverse transform:
//  - every read set hits 16 distinct banks (conflict-free schedule);
//  - every pass reads each coefficient exactly once;
//  - no coefficient is read before the previous pass wrote it back;
//  - write set k equals read set k and comes exactly 17 cycles
//    (1 + COLS*PE_LAT) after it;
//  - the two lanes of each column-0 PE differ in exactly the pass's first
//    butterfly bit (bit LOGN-1-s forward, bit s inverse) and the column-0
//    twiddle address is {inverse, 2^(LOGN-1-bit) + (index_a >> (bit+1))};
//  - the cycle count is 5 x 64 + 17 + stalls and equals 339 (this design's
//    count; the paper reports 336), done pulses once, busy covers the run.
module tb_ntt_ctrl;
  localparam int unsigned LOGN = 10, ROWS = 8, COLS = 2, N = 1 << LOGN;
  localparam int unsigned LANES = 2 * ROWS, LOGB = 4, WB = 1 + COLS * 8;
  localparam int unsigned NPASS = 5, SETS = N / LANES, EXPECT_CYC = 339;
  logic clk = 1'b0, rst_n = 1'b1;
  // reset is asserted by a falling edge so the asynchronous reset acts at once
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;

  logic start = 1'b0, busy, done, stall, rd_en, rd_tag, rd_ready, wr_en, wr_tag, h_wtag;
  logic [31:0] cycles;
  ntt_pkg::mode_e mode_in = ntt_pkg::MODE_NTT, pe_mode;
  logic [LANES-1:0][LOGN-1:0] rd_idx, wr_idx;
  logic [COLS-1:0] pe_byp;
  logic [COLS-1:0][ROWS-1:0][LOGN:0] tw_addr;

  ntt_ctrl #(.LOGN(LOGN), .ROWS(ROWS), .COLS(COLS)) dut (.*);

  logic tags [N];
  always_comb begin
    rd_ready = 1'b1;
    for (int l = 0; l < LANES; l++) if (tags[rd_idx[l]] != rd_tag) rd_ready = 1'b0;
  end
  always_ff @(posedge clk) if (wr_en) for (int l = 0; l < LANES; l++) tags[wr_idx[l]] <= wr_tag;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #2000000 $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // bookkeeping of one transform
  int unsigned cyc, nrd, nwr, n_stall, n_done;
  int unsigned rd_cyc [NPASS * SETS];
  logic [LANES-1:0][LOGN-1:0] rd_set [NPASS * SETS];
  int wr_pass [N];        // pass that last wrote each index (-1: host)
  int wr_at   [N];        // cycle of that write
  int unsigned seen [NPASS][N];
  bit cur_ntt;

  function automatic int unsigned bank(int unsigned i);
    return ntt_pkg::bank_of(i, LOGN, LOGB);
  endfunction

  always @(negedge clk) if (busy) begin
    cyc++;
    if (stall) n_stall++;
    if (rd_en && rd_ready) begin : rd
      int unsigned p, bit_s, diff;
      logic [LANES-1:0] banks;
      p = nrd / SETS;
      banks = '0;
      for (int l = 0; l < LANES; l++) begin
        banks[bank(rd_idx[l])] = 1'b1;
        seen[p][rd_idx[l]]++;
        check(p == 0 || (wr_pass[rd_idx[l]] == int'(p) - 1 && wr_at[rd_idx[l]] < int'(cyc)),
              $sformatf("read of %0d in pass %0d before its write-back", rd_idx[l], p));
      end
      check(&banks, $sformatf("bank conflict in read set %0d", nrd));
      bit_s = cur_ntt ? LOGN - 1 - p * COLS : p * COLS;
      for (int r = 0; r < ROWS; r++) begin
        diff = rd_idx[2 * r] ^ rd_idx[2 * r + 1];
        check(diff == (1 << bit_s) && rd_idx[2 * r][bit_s] == 1'b0,
              $sformatf("PE %0d column 0 pair (%0d,%0d) pass %0d", r, rd_idx[2*r], rd_idx[2*r+1], p));
        check(tw_addr[0][r] == {!cur_ntt, LOGN'((1 << (LOGN - 1 - bit_s)) + (rd_idx[2 * r] >> (bit_s + 1)))},
              $sformatf("column 0 twiddle address PE %0d pass %0d", r, p));
      end
      check(pe_byp == '0, "no bypass at the default size");
      rd_cyc[nrd] = cyc;
      rd_set[nrd] = rd_idx;
      nrd++;
    end
    if (wr_en) begin : wr
      bit same;
      check(nwr < nrd && cyc == rd_cyc[nwr] + WB, $sformatf("write set %0d timing", nwr));
      for (int l = 0; l < LANES; l++) begin
        same = 1'b0;
        for (int m = 0; m < LANES; m++) same |= (wr_idx[l] == rd_set[nwr][m]);
        check(same, $sformatf("write set %0d lane %0d index %0d not in read set", nwr, l, wr_idx[l]));
        wr_pass[wr_idx[l]] = nwr / SETS;
        wr_at[wr_idx[l]]   = cyc;
      end
      nwr++;
    end
  end
  always @(negedge clk) if (done) n_done++;

  task automatic run(input ntt_pkg::mode_e m);
    cyc = 0; nrd = 0; nwr = 0; n_stall = 0; n_done = 0;
    cur_ntt = (m == ntt_pkg::MODE_NTT);
    for (int i = 0; i < N; i++) begin
      wr_pass[i] = -1; wr_at[i] = 0;
      tags[i] = h_wtag;            // as left by host writes
      for (int p = 0; p < NPASS; p++) seen[p][i] = 0;
    end
    @(negedge clk);
    mode_in = m; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    do @(negedge clk); while (!done);
    repeat (3) @(negedge clk);
    check(!busy, "busy falls after done");
    check(n_done == 1, "done pulses once");
    check(nrd == NPASS * SETS && nwr == NPASS * SETS, "all read and write sets issued");
    for (int p = 0; p < NPASS; p++)
      for (int i = 0; i < N; i++)
        check(seen[p][i] == 1, $sformatf("pass %0d index %0d read %0d times", p, i, seen[p][i]));
    check(cycles == NPASS * SETS + WB + n_stall, $sformatf("cycles %0d vs %0d + stalls %0d", cycles, NPASS * SETS + WB, n_stall));
    check(cycles == EXPECT_CYC, $sformatf("cycles %0d, expected %0d", cycles, EXPECT_CYC));
    $display("%s: %0d cycles, %0d stalls", cur_ntt ? "NTT" : "INTT", cycles, n_stall);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(ntt_pkg::MODE_NTT);
    run(ntt_pkg::MODE_INTT);
    run(ntt_pkg::MODE_NTT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_coeff_mem -- checks the banked coefficient memory at its default size
// (N = 1024, 16 banks) against a flat array model.
//  1. every coefficient is written and read back through the host port
//     (one-cycle read latency);
//  2. random lane reads and writes follow: each access set is a random base
//     index whose window of LOGB consecutive bits (random position) takes
//     all 16 values in a random lane order, as the control unit generates
//     them. Read data must match the model one cycle later (a read and a
//     write of the same word in one cycle return the old value), and
//     rd_ready must equal "all addressed tags equal rd_tag" every cycle.
module tb_coeff_mem;
  localparam int unsigned W = 34, LOGN = 10, LANES = 16, LOGB = 4, N = 1 << LOGN;
  localparam int unsigned NOPS = 4000;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0, n_ready = 0, n_notready = 0, n_rw = 0;

  logic rd_en = 1'b0, rd_tag = 1'b0, rd_ready, wr_en = 1'b0, wr_tag = 1'b0;
  logic [LANES-1:0][LOGN-1:0] rd_idx = '0, wr_idx = '0;
  logic [LANES-1:0][W-1:0] rd_data, wr_data = '0;
  logic h_we = 1'b0, h_wtag = 1'b0;
  logic [LOGN-1:0] h_idx = '0;
  logic [W-1:0] h_wdata = '0, h_rdata;

  coeff_mem #(.W(W), .LOGN(LOGN), .LANES(LANES)) dut (.*);

  logic [W-1:0] mdat [N];
  logic         mtag [N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // a conflict-free lane index set: window bits [wlo +: LOGB] = permuted lane
  task automatic make_set(output logic [LANES-1:0][LOGN-1:0] idx);
    int unsigned wlo = $urandom % (LOGN - LOGB + 1);
    int unsigned base = $urandom % N;
    int unsigned perm [LANES];
    for (int l = 0; l < LANES; l++) perm[l] = l;
    perm.shuffle();
    base &= ~(((1 << LOGB) - 1) << wlo);
    for (int l = 0; l < LANES; l++) idx[l] = LOGN'(base | (perm[l] << wlo));
  endtask

  initial begin
    #2000000 $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [LANES-1:0][W-1:0] exp_rd;
    logic exp_ready;
    bit   pend;
    // 1. host port
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      h_we = 1'b1; h_idx = LOGN'(i); h_wtag = 1'($urandom); h_wdata = W'({$urandom, $urandom});
      mdat[i] = h_wdata; mtag[i] = h_wtag;
    end
    @(negedge clk);
    h_we = 1'b0;
    for (int i = 0; i < N; i++) begin
      h_idx = LOGN'((i * 37) % N);
      @(negedge clk);
      check(h_rdata == mdat[(i * 37) % N], $sformatf("host read %0d", (i * 37) % N));
    end
    // 2. lane ports
    pend = 1'b0;
    for (int k = 0; k < NOPS; k++) begin
      rd_en = ($urandom % 4 != 0);
      wr_en = ($urandom % 2 == 0);
      make_set(rd_idx);
      make_set(wr_idx);
      rd_tag = 1'($urandom);
      wr_tag = 1'($urandom);
      for (int l = 0; l < LANES; l++) wr_data[l] = W'({$urandom, $urandom});
      #1;
      // result of the previous read, checked while the next address is
      // already applied
      if (pend) begin
        checks++;
        if (rd_data != exp_rd) begin
          failures++;
          if (failures < 10) $display("FAIL: lane read op %0d", k - 1);
        end
      end
      exp_ready = 1'b1;
      for (int l = 0; l < LANES; l++) begin
        exp_rd[l] = mdat[rd_idx[l]];
        if (mtag[rd_idx[l]] != rd_tag) exp_ready = 1'b0;
      end
      check(rd_ready == exp_ready, $sformatf("rd_ready op %0d", k));
      if (exp_ready) n_ready++; else n_notready++;
      pend = rd_en;
      if (rd_en && wr_en) n_rw++;
      @(negedge clk);
      if (wr_en)
        for (int l = 0; l < LANES; l++) begin
          mdat[wr_idx[l]] = wr_data[l];
          mtag[wr_idx[l]] = wr_tag;
        end
    end
    rd_en = 1'b0; wr_en = 1'b0;
    if (pend) check(rd_data == exp_rd, "last lane read");
    check(n_ready > 0 && n_notready > 0 && n_rw > 0, "ready, not-ready and read+write cycles all seen");
    $display("ready=%0d not_ready=%0d read+write=%0d", n_ready, n_notready, n_rw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

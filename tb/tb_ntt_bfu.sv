// tb_ntt_bfu -- checks the unified butterfly PE against a bit-exact model.
// A 17-bit and a 34-bit PE receive a new random butterfly every cycle with a
// random mode (NTT / INTT) and random bypass; each pair of outputs must match
// the model exactly eight cycles later (the PE latency). Besides the exact
// match, outputs must stay in [0, 2q) and be congruent to the butterfly
// definition modulo q. The modulus changes every 1000 vectors.
module tb_ntt_bfu;
  localparam int unsigned LAT = 8, NVEC = 6000;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0, n_ntt = 0, n_intt = 0, n_byp = 0;

  `include "bfu_ref.svh"

  ntt_pkg::mode_e mode = ntt_pkg::MODE_NTT;
  logic byp = 1'b0;
  logic [16:0] q17 = '0, mu17 = '0, a17 = '0, b17 = '0, w17 = '0, ao17, bo17;
  logic [33:0] q34 = '0, mu34 = '0, a34 = '0, b34 = '0, w34 = '0, ao34, bo34;
  wide_t e17a [NVEC], e17b [NVEC], e34a [NVEC], e34b [NVEC];

  ntt_bfu #(.W(17)) dut17 (.clk, .mode, .bypass(byp), .q(q17), .mu(mu17),
                           .a(a17), .b(b17), .w(w17), .a_o(ao17), .b_o(bo17));
  ntt_bfu #(.W(34)) dut34 (.clk, .mode, .bypass(byp), .q(q34), .mu(mu34),
                           .a(a34), .b(b34), .w(w34), .a_o(ao34), .b_o(bo34));

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

  initial begin
    wide_t x, y, R34;
    R34 = wide_t'(1) << 34;
    // one block of NVEC/6 vectors per modulus; the pipeline drains between
    // blocks so a modulus change never meets work of the previous modulus
    for (int blk = 0; blk < 6; blk++) begin
      q17  = (blk == 0) ? 17'd12289 : (blk == 1) ? 17'd3329 : 17'(($urandom % 8191) * 2 + 1);
      q34  = (blk == 0) ? 34'd8380417 : (blk == 1) ? 34'd2013265921 : 34'({$urandom} % 32'h40000000) * 2 + 1;
      mu17 = 17'(ref_neg_inv(wide_t'(q17), 17));
      mu34 = 34'(ref_neg_inv(wide_t'(q34), 34));
      for (int k = 0; k < NVEC / 6 + LAT; k++) begin
        @(negedge clk);
        if (k >= LAT) begin
          check(ao17 == 17'(e17a[k-LAT]) && bo17 == 17'(e17b[k-LAT]),
                $sformatf("W=17 vec %0d out=(%0d,%0d) exp=(%0d,%0d)", k-LAT, ao17, bo17, e17a[k-LAT], e17b[k-LAT]));
          check(ao34 == 34'(e34a[k-LAT]) && bo34 == 34'(e34b[k-LAT]),
                $sformatf("W=34 vec %0d out=(%0d,%0d) exp=(%0d,%0d)", k-LAT, ao34, bo34, e34a[k-LAT], e34b[k-LAT]));
        end
        if (k < NVEC / 6) begin
          mode = ($urandom % 2) ? ntt_pkg::MODE_NTT : ntt_pkg::MODE_INTT;
          byp  = ($urandom % 5 == 0);
          if (byp) n_byp++; else if (mode == ntt_pkg::MODE_NTT) n_ntt++; else n_intt++;
          a17 = 17'($urandom % (2 * q17)); b17 = 17'($urandom % (2 * q17)); w17 = 17'($urandom % q17);
          a34 = 34'({$urandom, $urandom} % (64'(q34) * 2));
          b34 = 34'({$urandom, $urandom} % (64'(q34) * 2));
          w34 = 34'({$urandom, $urandom} % 64'(q34));
          if (k % 61 == 0) begin a17 = 17'(2 * q17 - 1); b17 = a17; a34 = 34'(2 * 64'(q34) - 1); b34 = a34; end
          ref_bfu(mode == ntt_pkg::MODE_NTT, byp, q17, mu17, 17, a17, b17, w17, e17a[k], e17b[k]);
          ref_bfu(mode == ntt_pkg::MODE_NTT, byp, q34, mu34, 34, a34, b34, w34, e34a[k], e34b[k]);
          // the model itself must satisfy the butterfly definition mod q
          if (!byp) begin
            if (mode == ntt_pkg::MODE_NTT) begin
              x = (wide_t'(a34) * R34 + wide_t'(b34) * w34) % q34;
              y = (wide_t'(a34) * R34 + wide_t'(q34) * R34 - (wide_t'(b34) * w34) % q34) % q34;
            end else begin
              x = ((wide_t'(a34) + b34) * R34 * ((wide_t'(q34) + 1) / 2)) % q34;
              y = ((wide_t'(a34) + 2 * wide_t'(q34) - b34) * w34) % q34;
            end
            check(e34a[k] < 2 * wide_t'(q34) && e34b[k] < 2 * wide_t'(q34), "model output range");
            check((e34a[k] * R34) % q34 == x && (e34b[k] * R34) % q34 == y,
                  $sformatf("model congruence mode=%0d a=%0d b=%0d w=%0d q=%0d", mode, a34, b34, w34, q34));
          end
        end
      end
    end
    check(n_ntt > 0 && n_intt > 0 && n_byp > 0, "NTT, INTT and bypass all exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

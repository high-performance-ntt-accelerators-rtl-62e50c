// tb_mod_add_div2 -- checks the merged modular adder / halver (combinational).
// NTT mode: out = x + y reduced into [0, 2q). INTT mode: out = (x + y) / 2
// mod q in [0, 2q), using the even / odd-below-2q / odd-above-2q cases.
// Operands are random in the redundant range [0, 2q); for each mode every
// correction case must be hit, and results are checked by congruence and
// range for a 17-bit and a 34-bit instance.
module tb_mod_add_div2;
  localparam int unsigned NVEC = 20000;
  int unsigned checks = 0, failures = 0;
  int unsigned hit [2][4];
  ntt_pkg::mode_e mode = ntt_pkg::MODE_NTT;
  logic [16:0] q17 = 17'd12289, x17 = '0, y17 = '0, o17;
  logic [33:0] q34 = 34'd8380417, x34 = '0, y34 = '0, o34;

  mod_add_div2 #(.W(17)) dut17 (.mode, .q(q17), .x(x17), .y(y17), .out(o17));
  mod_add_div2 #(.W(34)) dut34 (.mode, .q(q34), .x(x34), .y(y34), .out(o34));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // expected value and correction case (0 none, 1 +q, 2 -q, 3 -2q)
  function automatic longint unsigned ref_out(bit ntt, longint unsigned q,
                                              longint unsigned s, output int c);
    if (ntt) begin
      c = (s >= 2 * q) ? 3 : 0;
      return (s >= 2 * q) ? s - 2 * q : s;
    end
    if (!s[0])     begin c = 0; return s / 2; end
    if (s < 2 * q) begin c = 1; return (s + q) / 2; end
    c = 2; return (s - q) / 2;
  endfunction

  initial begin
    #1000000 $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    longint unsigned e, s, half;
    int c;
    for (int k = 0; k < NVEC; k++) begin
      mode = (k % 2 == 0) ? ntt_pkg::MODE_NTT : ntt_pkg::MODE_INTT;
      if (k % 1000 == 0) begin
        q17 = (k == 0) ? 17'd12289 : (k % 3000 == 0) ? 17'd3329 : 17'(($urandom % 8191) * 2 + 1);
        q34 = (k == 0) ? 34'd8380417 : (k % 3000 == 0) ? 34'h7FFFFFFF : 34'({$urandom} % 32'h40000000) * 2 + 1;
      end
      x17 = 17'($urandom % (2 * q17)); y17 = 17'($urandom % (2 * q17));
      x34 = 34'({$urandom, $urandom} % (64'(q34) * 2));
      y34 = 34'({$urandom, $urandom} % (64'(q34) * 2));
      if (k % 50 < 2) begin x17 = 17'(2 * q17 - 1); y17 = x17; x34 = 34'(2 * 64'(q34) - 1); y34 = x34; end
      #1;
      s = longint'(x17) + longint'(y17);
      e = ref_out(mode == ntt_pkg::MODE_NTT, q17, s, c);
      hit[mode == ntt_pkg::MODE_NTT][c]++;
      half = (longint'(q17) + 1) / 2;
      check(o17 == 17'(e), $sformatf("W=17 mode=%0d x=%0d y=%0d out=%0d exp=%0d", mode, x17, y17, o17, e));
      check(o17 < 2 * q17, "W=17 out < 2q");
      if (mode == ntt_pkg::MODE_NTT) check(longint'(o17) % q17 == s % q17, "W=17 sum congruence");
      else check(longint'(o17) % q17 == (s % q17) * half % q17, "W=17 half congruence");
      s = longint'(x34) + longint'(y34);
      e = ref_out(mode == ntt_pkg::MODE_NTT, q34, s, c);
      hit[mode == ntt_pkg::MODE_NTT][c]++;
      check(o34 == 34'(e), $sformatf("W=34 mode=%0d x=%0d y=%0d out=%0d exp=%0d", mode, x34, y34, o34, e));
      check(o34 < 2 * 64'(q34), "W=34 out < 2q");
      #1;
    end
    check(hit[1][0] > 0 && hit[1][3] > 0, "NTT cases +0 and -2q both hit");
    check(hit[0][0] > 0 && hit[0][1] > 0 && hit[0][2] > 0, "INTT cases +0, +q, -q all hit");
    $display("cases NTT: +0=%0d -2q=%0d  INTT: +0=%0d +q=%0d -q=%0d",
             hit[1][0], hit[1][3], hit[0][0], hit[0][1], hit[0][2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

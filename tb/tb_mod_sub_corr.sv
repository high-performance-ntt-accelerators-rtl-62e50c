// tb_mod_sub_corr -- checks the modular subtractor with +2q correction
// (combinational): out = x - y if that is non-negative, else x - y + 2q, so
// out lies in [0, 2q) and is congruent to x - y mod q for x, y in [0, 2q).
// Both the corrected and the uncorrected branch must be exercised.
module tb_mod_sub_corr;
  localparam int unsigned NVEC = 20000;
  int unsigned checks = 0, failures = 0, n_corr = 0, n_plain = 0;
  logic [16:0] q17 = 17'd12289, x17 = '0, y17 = '0, o17;
  logic [33:0] q34 = 34'd8380417, x34 = '0, y34 = '0, o34;

  mod_sub_corr #(.W(17)) dut17 (.q(q17), .x(x17), .y(y17), .out(o17));
  mod_sub_corr #(.W(34)) dut34 (.q(q34), .x(x34), .y(y34), .out(o34));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #1000000 $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    longint e;
    for (int k = 0; k < NVEC; k++) begin
      if (k % 1000 == 0) begin
        q17 = (k == 0) ? 17'd12289 : 17'(($urandom % 8191) * 2 + 1);
        q34 = (k == 0) ? 34'd8380417 : 34'({$urandom} % 32'h40000000) * 2 + 1;
      end
      x17 = 17'($urandom % (2 * q17)); y17 = 17'($urandom % (2 * q17));
      x34 = 34'({$urandom, $urandom} % (64'(q34) * 2));
      y34 = 34'({$urandom, $urandom} % (64'(q34) * 2));
      if (k % 100 == 0) begin x17 = '0; y17 = 17'(2 * q17 - 1); x34 = '0; y34 = 34'(2 * 64'(q34) - 1); end
      if (k % 100 == 1) begin x17 = 17'(2 * q17 - 1); y17 = '0; x34 = 34'(2 * 64'(q34) - 1); y34 = '0; end
      #1;
      e = longint'(x17) - longint'(y17);
      if (e < 0) begin e += 2 * longint'(q17); n_corr++; end else n_plain++;
      check(o17 == 17'(e), $sformatf("W=17 x=%0d y=%0d out=%0d exp=%0d", x17, y17, o17, e));
      e = longint'(x34) - longint'(y34);
      if (e < 0) e += 2 * longint'(q34);
      check(o34 == 34'(e), $sformatf("W=34 x=%0d y=%0d out=%0d exp=%0d", x34, y34, o34, e));
      #1;
    end
    check(n_corr > 0 && n_plain > 0, "both branches exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

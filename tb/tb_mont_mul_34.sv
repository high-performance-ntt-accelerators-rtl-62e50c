// tb_mont_mul_34 -- checks the 34-bit Montgomery multiplier (eleven DSP
// slices in three levels of two stages, six cycles). For random odd moduli
// q < 2^31 and operands in [0, 2q) the result must equal
// (a*b + m*q) / 2^34 with m = (a*b mod 2^34) * mu mod 2^34, which is
// congruent to a*b*2^-34 mod q and lies in [0, 2q). One operand pair per
// cycle; each result is compared exactly six cycles later.
module tb_mont_mul_34;
  localparam int unsigned LAT = 6, NVEC = 4000;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [33:0] a = '0, b = '0, q = 34'd8380417, mu = '0, r;
  int unsigned checks = 0, failures = 0;
  logic [33:0] expq [NVEC];

  mont_mul_34 dut (.clk, .a, .b, .q, .mu, .r);

  function automatic logic [33:0] neg_inv(logic [33:0] qq);
    logic [33:0] inv = qq;
    for (int i = 0; i < 6; i++) inv = inv * (34'd2 - qq * inv);
    return -inv;
  endfunction

  initial begin
    #1000000 $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [135:0] ab, m, s, R;
    R = 136'(1) << 34;
    for (int k = 0; k < NVEC + LAT; k++) begin
      @(negedge clk);
      if (k >= LAT) begin
        checks++;
        if (r !== expq[k-LAT]) begin
          failures++;
          if (failures < 10) $display("FAIL: vec %0d r=%0d exp=%0d", k-LAT, r, expq[k-LAT]);
        end
      end
      if (k < NVEC) begin
        if (k % 500 == 0) begin
          q = (k == 0) ? 34'd8380417 : (k == 500) ? 34'd2013265921 :
              (k == 1000) ? 34'h7FFFFFFF : 34'({$urandom} % 32'h40000000) * 2 + 1;
          mu = neg_inv(q);
        end
        a = 34'({$urandom, $urandom} % (64'(q) * 2));
        b = 34'({$urandom, $urandom} % (64'(q) * 2));
        if (k % 97 == 0) begin a = 34'(2 * 64'(q) - 1); b = a; end
        ab = 136'(a) * 136'(b);
        m  = ((ab % R) * 136'(mu)) % R;
        s  = (ab + m * 136'(q)) >> 34;
        expq[k] = 34'(s);
        if (s >= 136'(q) * 2 || ((s * R) % 136'(q)) != (ab % 136'(q))) begin
          $display("FAIL: reference self-check at vec %0d", k);
          failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

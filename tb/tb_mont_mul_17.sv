// tb_mont_mul_17 -- checks the 17-bit Montgomery multiplier (three DSP
// slices, six cycles). For random odd moduli q < 2^14 and operands in the
// redundant range [0, 2q) the result must equal (a*b + m*q) / 2^17 with
// m = (a*b mod 2^17) * mu mod 2^17, i.e. be congruent to a*b*2^-17 mod q and
// lie in [0, 2q). A new operand pair enters every cycle and each result is
// compared exactly six cycles later (latency check).
module tb_mont_mul_17;
  localparam int unsigned LAT = 6, NVEC = 4000;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [16:0] a = '0, b = '0, q = 17'd12289, mu = '0, r;
  int unsigned checks = 0, failures = 0;
  logic [16:0] expq [NVEC];

  mont_mul_17 dut (.clk, .a, .b, .q, .mu, .r);

  function automatic logic [16:0] neg_inv(logic [16:0] qq);
    logic [16:0] inv = qq;
    for (int i = 0; i < 5; i++) inv = inv * (17'd2 - qq * inv);
    return -inv;
  endfunction

  initial begin
    #1000000 $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [63:0] ab, m, s;
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
        // a new modulus every 500 vectors; q and mu change together
        if (k % 500 == 0) begin
          q  = (k == 0) ? 17'd12289 : (k == 500) ? 17'd3329 : 17'(($urandom % 8191) * 2 + 1);
          if (k == 1000) q = 17'h3FFF;           // largest 14-bit odd modulus
          mu = neg_inv(q);
        end
        a = 17'($urandom % (2 * q));
        b = 17'($urandom % (2 * q));
        if (k % 97 == 0) begin a = 17'(2 * q - 1); b = 17'(2 * q - 1); end
        ab = 64'(a) * 64'(b);
        m  = ((ab & 64'h1FFFF) * 64'(mu)) & 64'h1FFFF;
        s  = (ab + m * 64'(q)) >> 17;
        expq[k] = 17'(s);
        // the result itself must be reduced and correct modulo q
        if (s >= 64'(2 * q) || ((s << 17) % q) != (ab % q)) begin
          $display("FAIL: reference self-check at vec %0d", k);
          failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

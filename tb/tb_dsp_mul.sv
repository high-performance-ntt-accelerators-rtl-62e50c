// tb_dsp_mul -- checks the DSP-slice model: p = x * y + z, two register
// stages (inputs, product). Random operands are applied every cycle and
// each result is compared exactly two cycles later, which also checks the
// latency. Edge values (all ones) are mixed in.
module tb_dsp_mul;
  localparam int unsigned ZW = 34, PW = 35, LAT = 2, NVEC = 3000;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [16:0] x = '0, y = '0;
  logic [ZW-1:0] z = '0;
  logic [PW-1:0] p;
  int unsigned checks = 0, failures = 0;
  logic [PW-1:0] expq [NVEC];

  dsp_mul #(.ZW(ZW), .PW(PW)) dut (.clk, .x, .y, .z, .p);

  initial begin
    #1000000 $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int k = 0; k < NVEC + LAT; k++) begin
      @(negedge clk);
      if (k >= LAT) begin
        checks++;
        if (p !== expq[k-LAT]) begin
          failures++;
          if (failures < 10) $display("FAIL: vec %0d p=%h exp=%h", k-LAT, p, expq[k-LAT]);
        end
      end
      if (k < NVEC) begin
        x = (k % 7 == 0) ? '1 : 17'($urandom);
        y = (k % 11 == 0) ? '1 : 17'($urandom);
        z = (k % 13 == 0) ? '1 : ZW'({$urandom, $urandom});
        expq[k] = PW'(x) * PW'(y) + PW'(z);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_twiddle_mem -- checks the twiddle memory at its default size (2N = 2048
// entries, 16 read ports). All entries are written with random values, then
// every port reads a random address each cycle and must return the stored
// value one cycle later; a rewrite of part of the table in between must be
// visible on all ports.
module tb_twiddle_mem;
  localparam int unsigned W = 34, LOGN = 10, PORTS = 16, DEPTH = 2 << LOGN;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;
  logic we = 1'b0;
  logic [LOGN:0] waddr = '0;
  logic [W-1:0] wdata = '0;
  logic [PORTS-1:0][LOGN:0] raddr = '0;
  logic [PORTS-1:0][W-1:0] rdata;
  logic [W-1:0] model [DEPTH];

  twiddle_mem #(.W(W), .LOGN(LOGN), .PORTS(PORTS)) dut (.*);

  task automatic write_range(input int lo, input int hi);
    for (int i = lo; i < hi; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = (LOGN+1)'(i); wdata = W'({$urandom, $urandom});
      model[i] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
  endtask

  task automatic read_random(input int n);
    logic [PORTS-1:0][W-1:0] exp;
    for (int k = 0; k < n; k++) begin
      for (int p = 0; p < PORTS; p++) begin
        raddr[p] = (LOGN+1)'($urandom % DEPTH);
        exp[p] = model[raddr[p]];
      end
      @(negedge clk);
      for (int p = 0; p < PORTS; p++) begin
        checks++;
        if (rdata[p] != exp[p]) begin
          failures++;
          if (failures < 10) $display("FAIL: port %0d addr %0d", p, raddr[p]);
        end
      end
    end
  endtask

  initial begin
    #2000000 $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    write_range(0, DEPTH);
    read_random(1000);
    write_range(100, 300);
    read_random(1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

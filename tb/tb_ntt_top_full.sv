// tb_ntt_top_full -- end-to-end test of the accelerator at its default size:
// ntt_top is instantiated without parameter overrides, so it is the paper's
// N = 1024 configuration with 8 x 2 PEs and the 34-bit redundant datapath.
// The ML-DSA modulus q = 8380417 (23 bits) is used, then the 31-bit prime
// q = 2013265921, the widest modulus the 34-bit datapath is sized for.
// Each forward transform must take exactly 339 cycles: five passes of 64
// issue cycles, the 17-cycle read/PE/write pipeline and two read-after-write
// stalls at the hand-over between the last two passes (the paper reports
// 336 cycles for this configuration; see the README for the difference).
// Inputs include x + q redundant values; outputs are checked against a
// direct evaluation of the transform definition.
module tb_ntt_top_full;
  localparam int unsigned W = 34, LOGN = 10, ROWS = 8, COLS = 2;
  localparam int unsigned WATCHDOG = 2000000;
  localparam int unsigned EXPECT_CYC = 339;

  logic clk = 1'b0, rst_n = 1'b1;
  // reset is asserted by a falling edge so the asynchronous reset acts at once
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, busy, done, stall;
  ntt_pkg::mode_e mode = ntt_pkg::MODE_NTT;
  logic [W-1:0] q = '0, mu = '0, h_wdata = '0, h_rdata, tw_wdata = '0;
  logic [31:0] cycles;
  logic h_we = 1'b0, tw_we = 1'b0;
  logic [LOGN-1:0] h_idx = '0;
  logic [LOGN:0] tw_waddr = '0;

  ntt_top u_top (.*);

  `include "ntt_tb_body.svh"

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_modulus(8380417, 1'b1);
    run_modulus(2013265921, 1'b0);
    report_mechanisms(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ntt_top -- end-to-end test of the accelerator at reduced size: N = 128,
// 4 x 2 PEs, 17-bit datapath. Seven stages on a two-column array leave one
// stage for the last pass, so the bypass path is used; the short passes
// (16 cycles) against the 17-cycle pipeline force read-after-write stalls.
// The modulus is changed at run time: q = 12289 (Falcon/NewHope) and then
// q = 3329 (ML-KEM), each with a forward and an inverse transform checked
// against a direct evaluation of the transform definition.
module tb_ntt_top;
  localparam int unsigned W = 17, LOGN = 7, ROWS = 4, COLS = 2;
  localparam int unsigned WATCHDOG = 400000;
  localparam int unsigned EXPECT_CYC = 0;

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

  ntt_top #(.W(W), .LOGN(LOGN), .ROWS(ROWS), .COLS(COLS)) u_top (.*);

  `include "ntt_tb_body.svh"

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_modulus(12289, 1'b0);
    run_modulus(3329, 1'b1);
    report_mechanisms(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

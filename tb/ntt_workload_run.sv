// ntt_workload_run -- helper for tb_ntt_workloads: one accelerator instance
// at a given size, taken through the shared end-to-end sequence
// (ntt_tb_body.svh) with one modulus, a forward and an inverse transform.
// It starts when go rises, raises fin when finished and reports its check
// and failure counts and the measured forward-transform cycle count.
// PAPER_CYC is the cycle count published for this configuration; it is only
// printed next to the measured count, not checked, because this design's
// schedule differs (two read-after-write stalls and one memory-read cycle).
module ntt_workload_run #(
  parameter int unsigned W = 17,
  parameter int unsigned LOGN = 8,
  parameter int unsigned ROWS = 1,
  parameter int unsigned COLS = 1,
  parameter longint unsigned QV = 12289,
  parameter int unsigned PAPER_CYC = 0
) (
  input  logic        go,
  output logic        fin,
  output int unsigned n_checks,
  output int unsigned n_failures,
  output int unsigned ntt_cycles
);
  localparam int unsigned WATCHDOG = 4000000;
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

  ntt_top #(.W(W), .LOGN(LOGN), .ROWS(ROWS), .COLS(COLS)) u_top (
    .clk, .rst_n, .start, .mode, .q, .mu, .busy, .done, .cycles, .stall,
    .h_we, .h_idx, .h_wdata, .h_rdata, .tw_we, .tw_waddr, .tw_wdata);

  `include "ntt_tb_body.svh"

  int unsigned first_cyc = 0;
  always @(negedge clk) if (done && first_cyc == 0) first_cyc = cycles;

  assign n_checks   = checks;
  assign n_failures = failures;
  assign ntt_cycles = first_cyc;

  initial begin
    fin = 1'b0;
    wait (go);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_modulus(QV, 1'b1);
    $display("N=%0d PEs=%0dx%0d W=%0d q=%0d: %0d cycles per transform (published: %0d), %0d stalls",
             N, ROWS, COLS, W, QV, first_cyc, PAPER_CYC, n_stall / 2);
    fin = 1'b1;
  end
endmodule

// tb_ntt_workloads -- runs every accelerator configuration of the published
// evaluation through a negacyclic forward and inverse transform:
// N = 256, 512, 1024 with a scalar PE (1 x 1), a one-column array (w x 1 with
// w = N/32) and a two-column array (w x 2 with w = N/128), each with a 14-bit
// modulus on the 17-bit datapath (q = 12289) and with a 31-bit modulus on the
// 34-bit datapath (q = 2013265921). Both moduli satisfy q = 1 mod 2N for all
// three sizes. Each configuration checks its outputs against a direct
// evaluation of the transform; the measured cycle count is printed next to
// the published one. The configurations run one after another.
module tb_ntt_workloads;
  localparam int unsigned NCFG = 18;
  logic [NCFG:0] go;
  logic [NCFG-1:0] fin;
  int unsigned c [NCFG], f [NCFG], cyc [NCFG];
  int unsigned checks = 0, failures = 0;

  assign go[0] = 1'b1;
  for (genvar i = 0; i < NCFG; i++) begin : g_chain
    assign go[i+1] = fin[i];
  end

  // {W, LOGN, ROWS, COLS, published cycles}
  ntt_workload_run #(17,  8,  1, 1, 12289, 1032) r0  (go[0],  fin[0],  c[0],  f[0],  cyc[0]);
  ntt_workload_run #(17,  8,  8, 1, 12289,  136) r1  (go[1],  fin[1],  c[1],  f[1],  cyc[1]);
  ntt_workload_run #(17,  8,  2, 2, 12289,  272) r2  (go[2],  fin[2],  c[2],  f[2],  cyc[2]);
  ntt_workload_run #(17,  9,  1, 1, 12289, 2312) r3  (go[3],  fin[3],  c[3],  f[3],  cyc[3]);
  ntt_workload_run #(17,  9, 16, 1, 12289,  152) r4  (go[4],  fin[4],  c[4],  f[4],  cyc[4]);
  ntt_workload_run #(17,  9,  4, 2, 12289,  304) r5  (go[5],  fin[5],  c[5],  f[5],  cyc[5]);
  ntt_workload_run #(17, 10,  1, 1, 12289, 5128) r6  (go[6],  fin[6],  c[6],  f[6],  cyc[6]);
  ntt_workload_run #(17, 10, 32, 1, 12289,  168) r7  (go[7],  fin[7],  c[7],  f[7],  cyc[7]);
  ntt_workload_run #(17, 10,  8, 2, 12289,  336) r8  (go[8],  fin[8],  c[8],  f[8],  cyc[8]);
  ntt_workload_run #(34,  8,  1, 1, 2013265921, 1032) r9  (go[9],  fin[9],  c[9],  f[9],  cyc[9]);
  ntt_workload_run #(34,  8,  8, 1, 2013265921,  136) r10 (go[10], fin[10], c[10], f[10], cyc[10]);
  ntt_workload_run #(34,  8,  2, 2, 2013265921,  272) r11 (go[11], fin[11], c[11], f[11], cyc[11]);
  ntt_workload_run #(34,  9,  1, 1, 2013265921, 2312) r12 (go[12], fin[12], c[12], f[12], cyc[12]);
  ntt_workload_run #(34,  9, 16, 1, 2013265921,  152) r13 (go[13], fin[13], c[13], f[13], cyc[13]);
  ntt_workload_run #(34,  9,  4, 2, 2013265921,  304) r14 (go[14], fin[14], c[14], f[14], cyc[14]);
  ntt_workload_run #(34, 10,  1, 1, 2013265921, 5128) r15 (go[15], fin[15], c[15], f[15], cyc[15]);
  ntt_workload_run #(34, 10, 32, 1, 2013265921,  168) r16 (go[16], fin[16], c[16], f[16], cyc[16]);
  ntt_workload_run #(34, 10,  8, 2, 2013265921,  336) r17 (go[17], fin[17], c[17], f[17], cyc[17]);

  initial begin
    #5000000000 $display("FAIL: watchdog");
    for (int i = 0; i < NCFG; i++) begin checks += c[i]; failures += f[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (&fin);
    #1;
    for (int i = 0; i < NCFG; i++) begin
      checks += c[i]; failures += f[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

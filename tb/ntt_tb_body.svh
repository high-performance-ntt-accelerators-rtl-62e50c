// ntt_tb_body.svh -- shared end-to-end test sequence for the NTT accelerator
// testbenches. Included inside a testbench module that declares the
// localparams W, LOGN, ROWS, COLS, WATCHDOG, the clock/reset and the DUT
// signals, and instantiates ntt_top as u_top.
//
// For each modulus given to run_modulus() the sequence:
//  1. derives mu = -q^-1 mod 2^W, R mod q and a primitive 2N-th root of unity
//     psi (w = psi^2 is then a primitive N-th root);
//  2. loads the forward twiddle table (Montgomery form) and the inverse table
//     (inverse twiddles times 1/2, Montgomery form). With nega = 0 the table
//     gives the cyclic transform, entry 2^s + k = w^((N/2^(s+1)) * brv_s(k));
//     with nega = 1 it gives the negacyclic transform of the lattice schemes,
//     entry j = psi^brv_LOGN(j). The hardware is the same for both;
//  3. loads random coefficients in Montgomery form, half of them in the upper
//     redundant representative x + q;
//  4. runs a forward transform and compares every output (reduced mod q, out
//     of Montgomery form) with a direct O(N^2) evaluation of
//     A_k = sum_j a_j w^(jk) (cyclic) or A_k = sum_j a_j psi^(j(2k+1))
//     (negacyclic) at the bit-reversed position, checking also that
//     it stays below 2q and that the cycle count matches the schedule;
//  5. runs the inverse transform on the result left in memory and compares
//     with the original coefficients.
// Counters record how often each mechanism occurred: stalls, bypassed
// columns, both modes, redundant inputs, modulus changes.

localparam int unsigned N     = 1 << LOGN;
localparam int unsigned LANES = 2 * ROWS;
localparam int unsigned NPASS = (LOGN + COLS - 1) / COLS;
localparam int unsigned CPP   = N / LANES;
localparam int unsigned WBLAT = 1 + COLS * 8;

int unsigned checks = 0, failures = 0;
int unsigned n_stall = 0, n_bypass = 0, n_ntt = 0, n_intt = 0, n_red = 0, n_mod = 0;
int unsigned n_cyc = 0, n_nega = 0;

typedef longint unsigned u64;

function automatic u64 mulmod(u64 a, u64 b, u64 m);
  return (a * b) % m;
endfunction

function automatic u64 powmod(u64 b, u64 e, u64 m);
  u64 r = 1;
  b = b % m;
  while (e != 0) begin
    if (e[0]) r = mulmod(r, b, m);
    b = mulmod(b, b, m);
    e = e >> 1;
  end
  return r;
endfunction

function automatic int unsigned brv(int unsigned x, int unsigned bits);
  int unsigned r = 0;
  for (int unsigned i = 0; i < bits; i++) r |= ((x >> i) & 1) << (bits - 1 - i);
  return r;
endfunction

always @(posedge clk) begin
  if (u_top.stall) n_stall++;
  if (u_top.busy && u_top.u_ctrl.pe_byp != '0) n_bypass++;
end

task automatic check(input bit ok, input string what);
  checks++;
  if (!ok) begin
    failures++;
    if (failures < 20) $display("FAIL: %s", what);
  end
endtask

// All stimulus is applied with blocking assignments just after a falling
// edge, so the design samples it on the following rising edge.
task automatic host_write(input int unsigned idx, input u64 val);
  @(negedge clk);
  h_we = 1'b1; h_idx = LOGN'(idx); h_wdata = W'(val);
  @(negedge clk);
  h_we = 1'b0;
endtask

task automatic host_read(input int unsigned idx, output u64 val);
  @(negedge clk);
  h_idx = LOGN'(idx);
  @(negedge clk);      // address sampled on the rising edge in between
  val = u64'(h_rdata);
endtask

task automatic run_transform(input ntt_pkg::mode_e m, output int unsigned cyc,
                             output int unsigned stalls);
  int unsigned st0 = n_stall;
  @(negedge clk);
  mode = m; start = 1'b1;
  @(negedge clk);
  start = 1'b0;
  do @(negedge clk); while (!done);
  cyc    = u_top.cycles;
  stalls = n_stall - st0;
  if (m == ntt_pkg::MODE_NTT) n_ntt++; else n_intt++;
endtask

task automatic run_modulus(input u64 qv, input bit nega);
  u64 R, Rm, Rinv, inv, muv, w, wi, half, g, psi;
  u64 pw [];
  u64 pp [];
  u64 a [];
  u64 fwd [];
  u64 v;
  int unsigned cyc, stl;
  bit found;
  n_mod++;
  R    = u64'(1) << W;
  Rm   = R % qv;
  Rinv = powmod(Rm, qv - 2, qv);
  inv  = qv;
  for (int i = 0; i < 6; i++) inv = inv * (2 - qv * inv);
  muv  = (~inv + 1) & (R - 1);
  check(((qv * muv) & (R - 1)) == R - 1, "mu = -q^-1 mod R");
  // primitive 2N-th root of unity psi (psi^N = -1) and w = psi^2
  found = 0; psi = 0;
  for (g = 2; g < 200 && !found; g++) begin
    psi = powmod(g, (qv - 1) / (2 * N), qv);
    if (powmod(psi, u64'(N), qv) == qv - 1) found = 1;
  end
  check(found, "root of unity found");
  w = mulmod(psi, psi, qv);
  pp = new[2 * N];
  pp[0] = 1;
  for (int i = 1; i < 2 * N; i++) pp[i] = mulmod(pp[i-1], psi, qv);
  if (nega) n_nega++; else n_cyc++;
  pw = new[N];
  pw[0] = 1;
  for (int i = 1; i < N; i++) pw[i] = mulmod(pw[i-1], w, qv);
  half = (qv + 1) / 2;
  @(negedge clk);
  q  = W'(qv);
  mu = W'(muv);
  // twiddle tables: entry 2^s + k = w^((N/2^(s+1)) * brv_s(k))
  fwd = new[N];
  fwd[0] = 1;
  for (int unsigned s = 0; s < LOGN; s++)
    for (int unsigned k = 0; k < (1 << s); k++)
      fwd[(1 << s) + k] = nega ? pp[brv((1 << s) + k, LOGN)] : pw[(N >> (s + 1)) * brv(k, s)];
  for (int unsigned j = 0; j < N; j++) begin
    wi = mulmod(powmod(fwd[j], qv - 2, qv), half, qv);
    tw_we = 1'b1; tw_waddr = (LOGN+1)'(j);     tw_wdata = W'(mulmod(fwd[j], Rm, qv));
    @(negedge clk);
    tw_we = 1'b1; tw_waddr = (LOGN+1)'(N + j); tw_wdata = W'(mulmod(wi, Rm, qv));
    @(negedge clk);
  end
  tw_we = 1'b0;
  // coefficients
  a = new[N];
  for (int unsigned i = 0; i < N; i++) begin
    a[i] = (u64'($urandom) << 16 ^ u64'($urandom)) % qv;
    v = mulmod(a[i], Rm, qv);
    if ($urandom_range(1, 0) == 1) begin v = v + qv; n_red++; end
    host_write(i, v);
  end
  // forward transform
  run_transform(ntt_pkg::MODE_NTT, cyc, stl);
  $display("q=%0d %s NTT: %0d cycles (%0d passes x %0d + %0d pipeline + %0d stalls)",
           qv, nega ? "negacyclic" : "cyclic", cyc, NPASS, CPP, WBLAT, stl);
  check(cyc == NPASS * CPP + WBLAT + stl, "NTT cycle count");
  if (EXPECT_CYC != 0) check(cyc == EXPECT_CYC, "NTT cycle count (expected total)");
  for (int unsigned k = 0; k < N; k++) begin
    u64 ref_v = 0;
    for (int unsigned j = 0; j < N; j++)
      ref_v = (ref_v + mulmod(a[j], nega ? pp[(j * (2 * k + 1)) % (2 * N)] : pw[(j * k) % N], qv)) % qv;
    host_read(brv(k, LOGN), v);
    check(v < 2 * qv, "NTT output in [0,2q)");
    check(mulmod(v % qv, Rinv, qv) == ref_v, $sformatf("NTT A[%0d]", k));
  end
  // inverse transform on the data left in memory
  run_transform(ntt_pkg::MODE_INTT, cyc, stl);
  $display("q=%0d INTT: %0d cycles (%0d stalls)", qv, cyc, stl);
  check(cyc == NPASS * CPP + WBLAT + stl, "INTT cycle count");
  for (int unsigned i = 0; i < N; i++) begin
    host_read(i, v);
    check(v < 2 * qv, "INTT output in [0,2q)");
    check(mulmod(v % qv, Rinv, qv) == a[i], $sformatf("INTT a[%0d]", i));
  end
endtask

task automatic report_mechanisms(input bit expect_bypass);
  $display("mechanisms: stalls=%0d bypass_cycles=%0d ntt=%0d intt=%0d redundant_inputs=%0d moduli=%0d cyclic=%0d negacyclic=%0d",
           n_stall, n_bypass, n_ntt, n_intt, n_red, n_mod, n_cyc, n_nega);
  check(n_stall > 0, "stall occurred");
  check(n_ntt > 0 && n_intt > 0, "both modes ran");
  check(n_red > 0, "redundant inputs used");
  check(n_mod > 1, "modulus changed at run time");
  check(n_cyc > 0 && n_nega > 0, "cyclic and negacyclic tables both used");
  if (expect_bypass) check(n_bypass > 0, "bypass occurred");
endtask

initial begin
  repeat (WATCHDOG) @(posedge clk);
  failures++;
  $display("watchdog expired");
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end

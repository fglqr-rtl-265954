// tb_fglqr_core: end-to-end test bench body for fglqr_top, shared by the
// reduced-size and the full-size test. It loads an LQR path-tracking
// problem (5 states: lateral error, its rate, heading error, its rate,
// speed error; 2 controls: steering, acceleration), runs the accelerator
// and compares every state and control with a reference solution computed
// here in double precision by a different method: the normal equations
// H z = g of the same weighted least-squares problem, assembled factor by
// factor and solved by Gaussian elimination.
//
// Model (a common linearised kinematic path-tracking model; dt = 0.1 s,
// wheelbase L = 0.5 m, speed v): A = I with A[0][1] = dt, A[1][1] = 0,
// A[1][2] = v, A[2][3] = dt, A[3][3] = 0; B[3][0] = v/L, B[4][1] = dt.
// Q = I, R = I, P = 2^10 I as in the evaluated scenario.
//
// It also counts the mechanisms of the design and fails if one never
// happened: both engines eliminating at once, Evaluate/Update overlap in a
// QR block, and the number of eliminations of each engine. The run must
// finish within MAX_CYCLES (the reference design reports 1.94 ms per LQR
// solve at 167 MHz, i.e. about 324,000 cycles, for N = 50).
module tb_fglqr_core #(
  parameter int TN         = 4,
  parameter int NRUNS      = 2,
  parameter int MAX_CYCLES = 324000
) ();
  import fp32_pkg::*;
  import fglqr_pkg::*;
  import tb_fp_util_pkg::*;

  localparam int NX = 5, NU = 2;
  localparam int MID = TN / 2;
  localparam int NSOL = (TN + 1) * NX + TN * NU;
  localparam int NWORDS = NX * NX + NX * NU + 3 * NX + NU;

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic                      ib_we = 1'b0, start = 1'b0, busy, done, stat_parallel, stat_qr_overlap;
  logic [$clog2(NWORDS)-1:0] ib_waddr = '0;
  fp32_t                     ib_wdata = FP_ZERO, res_data;
  logic [$clog2(NSOL)-1:0]   res_addr = '0;
  logic [1:0]                stat_elim;

  if (TN == N_DEF) begin : g_default
    fglqr_top dut (.*);
  end else begin : g_reduced
    fglqr_top #(.N(TN)) dut (.*);
  end

  int checks = 0, failures = 0;
  int par_cycles = 0, ovl_cycles = 0, elim_l = 0, elim_r = 0;

  always @(posedge clk) if (!rst) begin
    if (stat_parallel) par_cycles++;
    if (stat_qr_overlap) ovl_cycles++;
    if (stat_elim[0]) elim_l++;
    if (stat_elim[1]) elim_r++;
  end

  real A [NX][NX], B [NX][NU], q [NX], rr [NU], p [NX], x0 [NX];
  real H [NSOL][NSOL], g [NSOL], z [NSOL];

  function automatic int xi(input int k, input int i); return k * NX + i; endfunction
  function automatic int ui(input int k, input int i); return (TN + 1) * NX + k * NU + i; endfunction

  task automatic reference();
    int col [NX + NU + NX];
    real w [NX + NU + NX];
    foreach (H[i, j]) H[i][j] = 0.0;
    foreach (g[i]) g[i] = 0.0;
    for (int i = 0; i < NX; i++) begin
      H[xi(0, i)][xi(0, i)] += p[i];
      g[xi(0, i)] += p[i] * x0[i];
    end
    for (int k = 0; k <= TN; k++) for (int i = 0; i < NX; i++) H[xi(k, i)][xi(k, i)] += q[i];
    for (int k = 0; k < TN; k++) for (int i = 0; i < NU; i++) H[ui(k, i)][ui(k, i)] += rr[i];
    for (int k = 0; k < TN; k++)
      for (int r = 0; r < NX; r++) begin
        // residual row r of x_{k+1} - A x_k - B u_k
        for (int c = 0; c < NX; c++) begin col[c] = xi(k, c); w[c] = -A[r][c]; end
        for (int c = 0; c < NU; c++) begin col[NX + c] = ui(k, c); w[NX + c] = -B[r][c]; end
        for (int c = 0; c < NX; c++) begin col[NX + NU + c] = xi(k + 1, c); w[NX + NU + c] = (c == r) ? 1.0 : 0.0; end
        for (int a = 0; a < 2 * NX + NU; a++)
          for (int b = 0; b < 2 * NX + NU; b++)
            H[col[a]][col[b]] += p[r] * w[a] * w[b];
      end
    // Gaussian elimination (H is symmetric positive definite)
    for (int k = 0; k < NSOL; k++)
      for (int i = k + 1; i < NSOL; i++) begin
        real f;
        if (H[i][k] != 0.0) begin
          f = H[i][k] / H[k][k];
          for (int j = k; j < NSOL; j++) H[i][j] -= f * H[k][j];
          g[i] -= f * g[k];
        end
      end
    for (int i = NSOL - 1; i >= 0; i--) begin
      real s;
      s = g[i];
      for (int j = i + 1; j < NSOL; j++) s -= H[i][j] * z[j];
      z[i] = s / H[i][i];
    end
  endtask

  task automatic load_word(input int a, input real v);
    @(negedge clk);
    ib_we = 1'b1; ib_waddr = ($clog2(NWORDS))'(a); ib_wdata = real2fp(v);
    @(negedge clk);
    ib_we = 1'b0;
  endtask

  task automatic run(input real v);
    int t0, cyc;
    real zmax, got;
    real dt, L;
    dt = 0.1; L = 0.5;
    foreach (A[i, j]) A[i][j] = (i == j) ? 1.0 : 0.0;
    A[0][1] = dt; A[1][1] = 0.0; A[1][2] = v; A[2][3] = dt; A[3][3] = 0.0;
    foreach (B[i, j]) B[i][j] = 0.0;
    B[3][0] = v / L; B[4][1] = dt;
    foreach (q[i]) q[i] = 1.0;
    foreach (rr[i]) rr[i] = 1.0;
    foreach (p[i]) p[i] = 1024.0;
    foreach (x0[i]) begin
      int rv;
      rv = $urandom_range(2000);
      x0[i] = (rv - 1000) / 1000.0;
    end
    for (int i = 0; i < NX; i++) for (int j = 0; j < NX; j++) load_word(i * NX + j, A[i][j]);
    for (int i = 0; i < NX; i++) for (int j = 0; j < NU; j++) load_word(NX * NX + i * NU + j, B[i][j]);
    for (int i = 0; i < NX; i++) load_word(NX * NX + NX * NU + i, q[i]);
    for (int i = 0; i < NU; i++) load_word(NX * NX + NX * NU + NX + i, rr[i]);
    for (int i = 0; i < NX; i++) load_word(NX * NX + NX * NU + NX + NU + i, p[i]);
    for (int i = 0; i < NX; i++) load_word(NX * NX + NX * NU + 2 * NX + NU + i, x0[i]);
    reference();
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = $time;
    while (!done) @(posedge clk);
    cyc = ($time - t0) / 10;
    $display("N=%0d v=%0.2f: solved in %0d cycles", TN, v, cyc);
    checks++;
    if (cyc > MAX_CYCLES) begin failures++; $display("FAIL latency %0d cycles > %0d", cyc, MAX_CYCLES); end
    zmax = 0.0;
    foreach (z[i]) if (rabs(z[i]) > zmax) zmax = rabs(z[i]);
    @(negedge clk);
    for (int i = 0; i < NSOL; i++) begin
      res_addr = ($clog2(NSOL))'(i);
      #1;
      got = fp2real(res_data);
      checks++;
      if (!close(got, z[i], 1e-3, 2e-4 * zmax)) begin
        failures++;
        if (failures < 20) $display("FAIL z[%0d] got %f want %f", i, got, z[i]);
      end
    end
    $display("  x_0 = %f %f %f %f %f, u_0 = %f %f", z[0], z[1], z[2], z[3], z[4], z[ui(0, 0)], z[ui(0, 1)]);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int r = 0; r < NRUNS; r++) run(1.0 + r);
    $display("parallel-elimination cycles %0d, QR overlap cycles %0d, eliminations left %0d right %0d",
             par_cycles, ovl_cycles, elim_l, elim_r);
    checks++;
    if (par_cycles == 0) begin failures++; $display("FAIL engines never eliminated in parallel"); end
    checks++;
    if (ovl_cycles == 0) begin failures++; $display("FAIL Evaluate/Update never overlapped"); end
    checks++;
    if (elim_l != NRUNS * (2 * MID + 1) || elim_r != NRUNS * 2 * (TN - MID)) begin
      failures++;
      $display("FAIL elimination counts %0d %0d", elim_l, elim_r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NRUNS * (MAX_CYCLES + 2000)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fg_engine: tests both kinds of engine on a horizon-2 problem with
// random A, B, diagonal Q, R and P = 2^10 I, whitened rows being written
// into the engine RAM through the external port.
//  Left engine (SIDE 0, 4 Update units): sweep (x_0, u_0), middle
//  elimination of x_1 together with a random imported factor F x_1 = f,
//  back substitution of all three conditionals. x_0, u_0, x_1 are compared
//  with the solution of the normal equations of the same factors.
//  Right engine (SIDE 1, 2 Update units): sweep (x_2, u_1). The factor it
//  leaves on x_1 must satisfy F'F = Schur complement of the normal matrix
//  on x_1, with zero right-hand side. Then x_1 is preloaded and back
//  substitution must return the x_2, u_1 that minimise the cost given x_1.
module tb_fg_engine;
  import fp32_pkg::*;
  import fglqr_pkg::*;
  import tb_fp_util_pkg::*;
  localparam int NX = 5, NU = 2, N = 2, MID = 1;
  localparam int COLS = 2 * NX + NU + 1, DEPTH = 3 * NX + NU + 2, AW = $clog2(DEPTH);
  localparam int NSOL = (N + 1) * NX + N * NU, CW = $clog2(N + 1), SW = $clog2(NSOL);
  localparam int A_FACT = NX + 2, A_MIDF = A_FACT + NX + NU;

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic          ext_we [2], cmd_start [2], busy [2], done [2], sw_en [2], qr_overlap [2], elim_done [2];
  logic [AW-1:0] ext_waddr [2], ext_raddr [2];
  fp32_t         ext_wdata [2][COLS], ext_rdata [2][COLS], sw_data [2], sr_data [2];
  eng_op_e       cmd_op [2];
  logic [CW-1:0] bs_lo [2], bs_hi [2];
  logic [SW-1:0] sw_addr [2], sr_addr [2];

  fg_engine #(.NX(NX), .NU(NU), .N(N), .MID(MID), .SIDE(1'b0), .N_UPD(4)) dut_left (
    .clk, .rst, .ext_we(ext_we[0]), .ext_waddr(ext_waddr[0]), .ext_wdata(ext_wdata[0]),
    .ext_raddr(ext_raddr[0]), .ext_rdata(ext_rdata[0]), .cmd_start(cmd_start[0]), .cmd_op(cmd_op[0]),
    .bs_lo(bs_lo[0]), .bs_hi(bs_hi[0]), .busy(busy[0]), .done(done[0]), .sw_en(sw_en[0]),
    .sw_addr(sw_addr[0]), .sw_data(sw_data[0]), .sr_addr(sr_addr[0]), .sr_data(sr_data[0]),
    .qr_overlap(qr_overlap[0]), .elim_done(elim_done[0]));
  fg_engine #(.NX(NX), .NU(NU), .N(N), .MID(MID), .SIDE(1'b1), .N_UPD(2)) dut_right (
    .clk, .rst, .ext_we(ext_we[1]), .ext_waddr(ext_waddr[1]), .ext_wdata(ext_wdata[1]),
    .ext_raddr(ext_raddr[1]), .ext_rdata(ext_rdata[1]), .cmd_start(cmd_start[1]), .cmd_op(cmd_op[1]),
    .bs_lo(bs_lo[1]), .bs_hi(bs_hi[1]), .busy(busy[1]), .done(done[1]), .sw_en(sw_en[1]),
    .sw_addr(sw_addr[1]), .sw_data(sw_data[1]), .sr_addr(sr_addr[1]), .sr_data(sr_data[1]),
    .qr_overlap(qr_overlap[1]), .elim_done(elim_done[1]));

  int checks = 0, failures = 0;
  real A [NX][NX], B [NX][NU], q [NX], rr [NU], x0 [NX], F [NX][NX], f [NX];
  real P;
  real H [12][12], g [12], z [12];

  function automatic real rnd(input real lo_v, input real hi_v);
    int rv;
    rv = $urandom_range(10000);
    return fp2real(real2fp(lo_v + (hi_v - lo_v) * rv / 10000.0));
  endfunction

  task automatic chk(input string what, input real got, input real want, input real tol);
    checks++;
    if (!close(got, want, tol, tol)) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %f want %f", what, got, want);
    end
  endtask

  // Gaussian elimination on the first n unknowns of H z = g
  task automatic gauss_solve(input int n);
    for (int k = 0; k < n; k++)
      for (int i = k + 1; i < n; i++) begin
        real m;
        m = H[i][k] / H[k][k];
        for (int j = k; j < n; j++) H[i][j] -= m * H[k][j];
        g[i] -= m * g[k];
      end
    for (int i = n - 1; i >= 0; i--) begin
      real s;
      s = g[i];
      for (int j = i + 1; j < n; j++) s -= H[i][j] * z[j];
      z[i] = s / H[i][i];
    end
  endtask

  // add weight * w w' for a dynamics row r: unknown index lists given
  task automatic add_dyn(input int xk [NX], input int uk [NU], input int xn [NX]);
    for (int r = 0; r < NX; r++) begin
      int  idx [2 * NX + NU];
      real w [2 * NX + NU];
      for (int c = 0; c < NX; c++) begin idx[c] = xk[c]; w[c] = -A[r][c]; end
      for (int c = 0; c < NU; c++) begin idx[NX + c] = uk[c]; w[NX + c] = -B[r][c]; end
      for (int c = 0; c < NX; c++) begin idx[NX + NU + c] = xn[c]; w[NX + NU + c] = (c == r) ? 1.0 : 0.0; end
      for (int a = 0; a < 2 * NX + NU; a++)
        for (int b = 0; b < 2 * NX + NU; b++) H[idx[a]][idx[b]] += P * w[a] * w[b];
    end
  endtask

  task automatic ram_write(input int e, input int a, input real row [COLS]);
    @(negedge clk);
    ext_we[e] = 1'b1; ext_waddr[e] = AW'(a);
    for (int c = 0; c < COLS; c++) ext_wdata[e][c] = real2fp(row[c]);
    @(negedge clk);
    ext_we[e] = 1'b0;
  endtask

  task automatic load_model(input int e);
    real row [COLS];
    foreach (row[c]) row[c] = 0.0;
    for (int c = 0; c < NX; c++) row[c] = $sqrt(q[c]);
    for (int c = 0; c < NU; c++) row[NX + c] = $sqrt(rr[c]);
    ram_write(e, 0, row);
    for (int r = 0; r < NX; r++) begin
      foreach (row[c]) row[c] = 0.0;
      for (int c = 0; c < NX; c++) row[c] = -32.0 * A[r][c];
      for (int c = 0; c < NU; c++) row[NX + c] = -32.0 * B[r][c];
      row[NX + NU] = 32.0;
      ram_write(e, 1 + r, row);
    end
    foreach (row[c]) row[c] = 0.0;
    for (int c = 0; c < NX; c++) row[c] = 32.0 * x0[c];
    ram_write(e, NX + 1, row);
  endtask

  task automatic command(input int e, input eng_op_e op, input int lo, input int hi);
    @(negedge clk);
    cmd_start[e] = 1'b1; cmd_op[e] = op; bs_lo[e] = CW'(lo); bs_hi[e] = CW'(hi);
    @(negedge clk) cmd_start[e] = 1'b0;
    while (!done[e]) @(posedge clk);
  endtask

  initial begin
    int xl0 [NX], xl1 [NX], ul0 [NU];
    real row [COLS];
    P = 1024.0;
    foreach (A[i, j]) A[i][j] = rnd(-1.0, 1.0);
    foreach (B[i, j]) B[i][j] = rnd(-1.0, 1.0);
    foreach (q[i]) q[i] = rnd(0.5, 2.0);
    foreach (rr[i]) rr[i] = rnd(0.5, 2.0);
    foreach (x0[i]) x0[i] = rnd(-1.0, 1.0);
    foreach (F[i, j]) F[i][j] = (j == i) ? rnd(1.0, 3.0) : (j > i ? rnd(-1.0, 1.0) : 0.0);
    foreach (f[i]) f[i] = rnd(-2.0, 2.0);
    for (int e = 0; e < 2; e++) begin
      ext_we[e] = 1'b0; cmd_start[e] = 1'b0; sw_en[e] = 1'b0; cmd_op[e] = OP_SWEEP;
      ext_waddr[e] = '0; ext_raddr[e] = '0; bs_lo[e] = '0; bs_hi[e] = '0;
      sw_addr[e] = '0; sw_data[e] = FP_ZERO; sr_addr[e] = '0;
      foreach (ext_wdata[e][c]) ext_wdata[e][c] = FP_ZERO;
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;

    // ---------------- left engine ----------------
    load_model(0);
    for (int r = 0; r < NX; r++) begin
      foreach (row[c]) row[c] = 0.0;
      for (int c = 0; c < NX; c++) row[c] = F[r][c];
      row[NX] = f[r];
      ram_write(0, A_MIDF + r, row);
    end
    command(0, OP_SWEEP, 0, 0);
    command(0, OP_MID, 0, 0);
    command(0, OP_BACKSUB, 0, 2);
    // unknowns: x0 -> 0..4, x1 -> 5..9, u0 -> 10..11
    foreach (H[i, j]) H[i][j] = 0.0;
    foreach (g[i]) g[i] = 0.0;
    for (int i = 0; i < NX; i++) begin
      xl0[i] = i; xl1[i] = NX + i;
      H[i][i] += P + q[i];
      g[i] += P * x0[i];
      H[NX + i][NX + i] += q[i];
    end
    for (int i = 0; i < NU; i++) begin ul0[i] = 2 * NX + i; H[2 * NX + i][2 * NX + i] += rr[i]; end
    add_dyn(xl0, ul0, xl1);
    for (int a = 0; a < NX; a++) begin
      for (int b = 0; b < NX; b++)
        for (int r = 0; r < NX; r++) H[NX + a][NX + b] += F[r][a] * F[r][b];
      for (int r = 0; r < NX; r++) g[NX + a] += F[r][a] * f[r];
    end
    gauss_solve(12);
    for (int i = 0; i < NX; i++) begin
      sr_addr[0] = SW'(i);          #1 chk("left x0", fp2real(sr_data[0]), z[i], 1e-3);
      sr_addr[0] = SW'(NX + i);     #1 chk("left x1", fp2real(sr_data[0]), z[NX + i], 1e-3);
    end
    for (int i = 0; i < NU; i++) begin
      sr_addr[0] = SW'(3 * NX + i); #1 chk("left u0", fp2real(sr_data[0]), z[2 * NX + i], 1e-3);
    end

    // ---------------- right engine ----------------
    load_model(1);
    command(1, OP_SWEEP, 0, 0);
    // unknowns: x2 -> 0..4, u1 -> 5..6, x1 -> 7..11
    foreach (H[i, j]) H[i][j] = 0.0;
    foreach (g[i]) g[i] = 0.0;
    for (int i = 0; i < NX; i++) begin
      xl0[i] = NX + NU + i;  // x1
      xl1[i] = i;            // x2
      H[i][i] += q[i];
    end
    for (int i = 0; i < NU; i++) begin ul0[i] = NX + i; H[NX + i][NX + i] += rr[i]; end
    add_dyn(xl0, ul0, xl1);
    begin
      real S [NX][NX], Hs [12][12], FtF;
      Hs = H;
      // Schur complement on x1: eliminate the first 7 unknowns
      for (int k = 0; k < NX + NU; k++)
        for (int i = k + 1; i < 12; i++) begin
          real m;
          m = Hs[i][k] / Hs[k][k];
          for (int j = k; j < 12; j++) Hs[i][j] -= m * Hs[k][j];
        end
      for (int a = 0; a < NX; a++) for (int b = 0; b < NX; b++) S[a][b] = Hs[NX + NU + a][NX + NU + b];
      for (int r = 0; r < NX; r++) begin
        @(negedge clk) ext_raddr[1] = AW'(A_FACT + r);
        @(negedge clk);
        for (int c = 0; c < NX; c++) F[r][c] = fp2real(ext_rdata[1][c]);
        f[r] = fp2real(ext_rdata[1][NX]);
        checks++;
        if (f[r] != 0.0) begin failures++; $display("FAIL right factor rhs %f", f[r]); end
      end
      for (int a = 0; a < NX; a++)
        for (int b = 0; b < NX; b++) begin
          FtF = 0.0;
          for (int r = 0; r < NX; r++) FtF += F[r][a] * F[r][b];
          chk("right F'F", FtF / P, S[a][b] / P, 1e-3);
        end
    end
    // preload x1 and back-substitute x2, u1
    for (int i = 0; i < NX; i++) begin
      x0[i] = rnd(-1.0, 1.0);
      @(negedge clk);
      sw_en[1] = 1'b1; sw_addr[1] = SW'(NX + i); sw_data[1] = real2fp(x0[i]);
    end
    @(negedge clk) sw_en[1] = 1'b0;
    command(1, OP_BACKSUB, 0, 1);
    for (int i = 0; i < NX + NU; i++) begin
      g[i] = 0.0;
      for (int j = 0; j < NX; j++) g[i] -= H[i][NX + NU + j] * x0[j];
    end
    gauss_solve(NX + NU);
    for (int i = 0; i < NX; i++) begin
      sr_addr[1] = SW'(2 * NX + i);      #1 chk("right x2", fp2real(sr_data[1]), z[i], 1e-3);
    end
    for (int i = 0; i < NU; i++) begin
      sr_addr[1] = SW'(3 * NX + NU + i); #1 chk("right u1", fp2real(sr_data[1]), z[NX + i], 1e-3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

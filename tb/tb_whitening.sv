// tb_whitening: feeds a random model through a row port modelled here and
// checks every RAM row the whitening block writes: dynamics rows
// [-P^1/2 A_r | -P^1/2 B_r | P^1/2] for P_rr = 2^10 and 2^4, the diagonal
// row [sqrt(Q) | sqrt(R)] and the prior row P^1/2 x_init, each computed
// here in double precision. Also checks the NX+2 cycle write schedule.
module tb_whitening;
  import fp32_pkg::*;
  import tb_fp_util_pkg::*;
  localparam int NX = 5, NU = 2, COLS = 13, DEPTH = 19, AW = $clog2(DEPTH);
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic start = 1'b0, busy, done, ram_we;
  logic [$clog2(NX)-1:0] ib_row;
  fp32_t a_row [NX], b_row [NU], q_r, r_r, p_r, x0_r, ram_wdata [COLS];
  logic [AW-1:0] ram_waddr;
  whitening #(.NX(NX), .NU(NU), .COLS(COLS), .DEPTH(DEPTH)) dut (.*);

  real A [NX][NX], B [NX][NU], q [NX], rr [NU], pe [NX], x0 [NX];
  int checks = 0, failures = 0, writes = 0;

  always_comb begin
    for (int c = 0; c < NX; c++) a_row[c] = real2fp(A[ib_row][c]);
    for (int c = 0; c < NU; c++) b_row[c] = real2fp(B[ib_row][c]);
    q_r  = real2fp(q[ib_row]);
    r_r  = (int'(ib_row) < NU) ? real2fp(rr[ib_row]) : FP_ZERO;
    p_r  = real2fp(2.0 ** pe[ib_row]);
    x0_r = real2fp(x0[ib_row]);
  end

  task automatic chk(input fp32_t got, input real want);
    checks++;
    if (!close(fp2real(got), want, 1e-6, 1e-12)) begin
      failures++;
      if (failures < 10) $display("FAIL addr %0d got %f want %f", ram_waddr, fp2real(got), want);
    end
  endtask

  always @(posedge clk) if (ram_we && !rst) begin
    int a;
    a = int'(ram_waddr);
    writes++;
    if (a == 0) begin
      for (int c = 0; c < NX; c++) chk(ram_wdata[c], $sqrt(q[c]));
      for (int c = 0; c < NU; c++) chk(ram_wdata[NX + c], $sqrt(rr[c]));
    end else if (a <= NX) begin
      real s;
      s = 2.0 ** (pe[a - 1] / 2);
      for (int c = 0; c < NX; c++) chk(ram_wdata[c], -s * A[a - 1][c]);
      for (int c = 0; c < NU; c++) chk(ram_wdata[NX + c], -s * B[a - 1][c]);
      chk(ram_wdata[NX + NU], s);
    end else if (a == NX + 1) begin
      for (int c = 0; c < NX; c++) chk(ram_wdata[c], 2.0 ** (pe[c] / 2) * x0[c]);
    end else begin
      failures++;
    end
  end

  initial begin
    int t0;
    foreach (A[i, j]) A[i][j] = fp2real(real2fp(($urandom_range(2000) / 1000.0) - 1.0));
    foreach (B[i, j]) B[i][j] = fp2real(real2fp(($urandom_range(2000) / 1000.0) - 1.0));
    foreach (q[i]) q[i] = fp2real(real2fp(0.5 + $urandom_range(1000) / 100.0));
    foreach (rr[i]) rr[i] = fp2real(real2fp(0.5 + $urandom_range(1000) / 100.0));
    foreach (x0[i]) x0[i] = fp2real(real2fp(($urandom_range(2000) / 1000.0) - 1.0));
    foreach (pe[i]) pe[i] = (i % 2) ? 4.0 : 10.0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    start = 1'b1;
    @(negedge clk) start = 1'b0;
    t0 = $time;
    while (!done) @(posedge clk);
    checks++;
    if (writes != NX + 2 || ($time - t0) / 10 != NX + 2) begin
      failures++;
      $display("FAIL %0d writes in %0d cycles", writes, ($time - t0) / 10);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

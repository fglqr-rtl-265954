// tb_qr_evaluate: random columns and pivots. Checks, in double precision,
// that the returned reflection maps the column onto the returned result
// (a - beta * v * (v . a) = r_col), that r_col keeps the rows above the
// pivot, has |alpha| = norm of the sub-column at the pivot and zeros
// below, that beta * |v|^2 = 2, and that done comes ROWS-p+3 cycles after
// start. A zero sub-column must give beta = 0.
module tb_qr_evaluate;
  import fp32_pkg::*;
  import tb_fp_util_pkg::*;
  localparam int ROWS = 15, RW = $clog2(ROWS);
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic start = 1'b0, busy, done;
  logic [RW-1:0] pivot = '0;
  fp32_t col_in [ROWS], v [ROWS], beta, r_col [ROWS];
  qr_evaluate #(.ROWS(ROWS)) dut (.*);

  int checks = 0, failures = 0;

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic one(input int p, input bit zero_sub);
    real a [ROWS], vv [ROWS], dot, vn, nrm, b;
    int t0;
    for (int r = 0; r < ROWS; r++) begin
      int rv;
      rv = $urandom_range(2000);
      a[r] = (zero_sub && r >= p) ? 0.0 : fp2real(real2fp((rv - 1000) / 100.0));
      col_in[r] = real2fp(a[r]);
    end
    @(negedge clk);
    pivot = RW'(p); start = 1'b1;
    @(negedge clk) start = 1'b0;
    t0 = $time - 10;
    while (!done) @(posedge clk);
    chk("latency", ($time - t0) / 10 == ROWS - p + 3);
    nrm = 0.0;
    for (int r = p; r < ROWS; r++) nrm += a[r] * a[r];
    nrm = $sqrt(nrm);
    b = fp2real(beta);
    dot = 0.0; vn = 0.0;
    for (int r = 0; r < ROWS; r++) begin
      vv[r] = fp2real(v[r]);
      dot += vv[r] * a[r];
      vn  += vv[r] * vv[r];
    end
    if (zero_sub) begin
      chk("beta zero", b == 0.0);
    end else begin
      chk("beta*|v|^2", close(b * vn, 2.0, 1e-5, 0.0));
      chk("alpha", close(rabs(fp2real(r_col[p])), nrm, 1e-6, 0.0));
      for (int r = 0; r < ROWS; r++)
        chk("H*a", close(a[r] - b * dot * vv[r], fp2real(r_col[r]), 1e-5, 1e-5 * nrm));
    end
    for (int r = 0; r < p; r++) chk("above pivot", r_col[r] == col_in[r]);
    for (int r = p + 1; r < ROWS; r++) chk("below pivot", r_col[r] == FP_ZERO);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int i = 0; i < 60; i++) one($urandom_range(ROWS - 1), 1'b0);
    one(3, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_partial_qr: drives the partial QR block with random matrices of the
// three shapes the engines use (15x13 with 12 variable columns, 15x8 with
// 7, 15x6 with 5; unused rows zero) and checks the result without repeating
// the algorithm: the output must be upper triangular in the variable
// columns, and its Gram matrix M^T M must equal A^T A of the input (an
// orthogonal transformation preserves it), checked in double precision with
// a relative tolerance. It also checks that every column comes out exactly
// once and that Evaluate and Update work overlapped at least once.
module tb_partial_qr;
  import fp32_pkg::*;
  import tb_fp_util_pkg::*;

  localparam int ROWS = 15, COLS = 13, N_UPD = 4;

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic        start = 1'b0, in_valid = 1'b0, in_ready, out_valid, busy, done, overlap;
  logic [3:0]  nvar = '0, ncol = '0, out_idx;
  fp32_t       in_data [ROWS], out_data [ROWS];

  partial_qr #(.ROWS(ROWS), .COLS(COLS), .N_UPD(N_UPD)) dut (.*);

  int checks = 0, failures = 0, overlap_cycles = 0;
  real a [ROWS][COLS], m [ROWS][COLS];
  int  seen [COLS];

  always @(posedge clk) if (overlap && !rst) overlap_cycles++;

  always @(posedge clk) if (out_valid && !rst) begin
    seen[out_idx]++;
    for (int r = 0; r < ROWS; r++) m[r][out_idx] = fp2real(out_data[r]);
  end

  task automatic run(input int nv, input int nrows);
    int nc, t0;
    real ga, gm, scale;
    nc = nv + 1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        int rv;
        rv = $urandom_range(2000);
        a[r][c] = (r < nrows && c < nc) ? fp2real(real2fp((rv - 1000) / 100.0)) : 0.0;
      end
    foreach (seen[c]) seen[c] = 0;
    @(negedge clk);
    nvar = 4'(nv); ncol = 4'(nc); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = $time;
    for (int c = 0; c < nc; c++) begin
      for (int r = 0; r < ROWS; r++) in_data[r] = real2fp(a[r][c]);
      in_valid = 1'b1;
      do @(posedge clk); while (!in_ready);
      @(negedge clk);
    end
    in_valid = 1'b0;
    while (!done) @(posedge clk);
    $display("nvar=%0d: %0d cycles", nv, ($time - t0) / 10);
    for (int c = 0; c < nc; c++) begin
      checks++;
      if (seen[c] != 1) begin failures++; $display("FAIL column %0d seen %0d times", c, seen[c]); end
    end
    for (int c = 0; c < nv; c++)
      for (int r = c + 1; r < ROWS; r++) begin
        checks++;
        if (m[r][c] != 0.0) begin failures++; $display("FAIL below diagonal r%0d c%0d = %f", r, c, m[r][c]); end
      end
    for (int i = 0; i < nc; i++)
      for (int j = i; j < nc; j++) begin
        ga = 0.0; gm = 0.0; scale = 0.0;
        for (int r = 0; r < ROWS; r++) begin
          ga += a[r][i] * a[r][j];
          gm += m[r][i] * m[r][j];
          scale += rabs(a[r][i] * a[r][j]);
        end
        checks++;
        if (rabs(ga - gm) > 1e-5 * scale + 1e-6) begin
          failures++;
          $display("FAIL gram(%0d,%0d) in %f out %f", i, j, ga, gm);
        end
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 1'b0;
    run(12, 15);
    run(12, 10);
    run(7, 9);
    run(5, 15);
    run(12, 15);
    checks++;
    if (overlap_cycles == 0) begin failures++; $display("FAIL Evaluate never overlapped Update"); end
    $display("overlap cycles %0d", overlap_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

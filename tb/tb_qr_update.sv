// tb_qr_update: applies random reflections (v, beta = 2/|v|^2, pivot p) to
// random columns and compares a - beta * (v . a) * v, computed in double
// precision, with the unit's output. Checks that rows above the pivot are
// untouched, that the index passes through and the tag is incremented, the
// 2*(ROWS-p)+2 cycle latency, and that the output is held under
// back-pressure.
module tb_qr_update;
  import fp32_pkg::*;
  import tb_fp_util_pkg::*;
  localparam int ROWS = 15, RW = $clog2(ROWS), IW = 4, TW = 5;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  fp32_t hh_v [ROWS], hh_beta, in_data [ROWS], out_data [ROWS];
  logic [RW-1:0] hh_p = '0;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0, busy;
  logic [IW-1:0] in_idx = '0, out_idx;
  logic [TW-1:0] in_tag = '0, out_tag;
  qr_update #(.ROWS(ROWS), .IW(IW), .TW(TW)) dut (.*);

  int checks = 0, failures = 0;

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic one(input int p);
    real a [ROWS], vv [ROWS], dot, vn, b, scale;
    int t0, hold;
    vn = 0.0;
    for (int r = 0; r < ROWS; r++) begin
      int r1, r2;
      r1 = $urandom_range(2000); r2 = $urandom_range(2000);
      a[r]  = fp2real(real2fp((r1 - 1000) / 100.0));
      vv[r] = (r < p) ? 0.0 : fp2real(real2fp((r2 - 1000) / 100.0));
      vn += vv[r] * vv[r];
      in_data[r] = real2fp(a[r]);
      hh_v[r] = real2fp(vv[r]);
    end
    hh_beta = real2fp(2.0 / vn);
    b = fp2real(hh_beta);
    dot = 0.0; scale = 0.0;
    for (int r = 0; r < ROWS; r++) begin dot += vv[r] * a[r]; scale += rabs(vv[r] * a[r]); end
    hh_p = RW'(p);
    in_idx = IW'($urandom_range(12)); in_tag = TW'($urandom_range(10));
    @(negedge clk);
    in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    t0 = $time - 10;
    while (!out_valid) @(posedge clk);
    chk("latency", ($time - t0) / 10 == 2 * (ROWS - p) + 2);
    hold = $urandom_range(3);
    repeat (hold) begin @(negedge clk); chk("held", out_valid); end
    for (int r = 0; r < ROWS; r++)
      chk("value", close(fp2real(out_data[r]), a[r] - b * dot * vv[r], 1e-5, 1e-6 * b * scale * rabs(vv[r]) + 1e-6));
    for (int r = 0; r < p; r++) chk("above pivot", out_data[r] == in_data[r]);
    chk("idx/tag", out_idx == in_idx && out_tag == in_tag + 1'b1);
    @(negedge clk) out_ready = 1'b1;
    @(negedge clk) out_ready = 1'b0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int i = 0; i < 60; i++) one($urandom_range(ROWS - 1));
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

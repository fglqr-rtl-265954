// tb_input_buffer: loads random words at every address and checks that the
// row port returns, for each row r, row r of A and B, Q_rr, R_rr (r < NU,
// else zero), P_rr and x_init_r according to the address map
// A (row-major) | B (row-major) | diag Q | diag R | diag P | x_init.
module tb_input_buffer;
  import fp32_pkg::*;
  localparam int NX = 5, NU = 2, NWORDS = NX * NX + NX * NU + 3 * NX + NU;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 1'b0;
  logic [$clog2(NWORDS)-1:0] waddr = '0;
  fp32_t wdata = '0, a_row [NX], b_row [NU], q_r, r_r, p_r, x0_r;
  logic [$clog2(NX)-1:0] row = '0;
  input_buffer #(.NX(NX), .NU(NU)) dut (.*);

  int checks = 0, failures = 0;
  fp32_t m [NWORDS];

  task automatic chk(input string what, input fp32_t got, input fp32_t want);
    checks++;
    if (got !== want) begin failures++; if (failures < 10) $display("FAIL %s row %0d", what, row); end
  endtask

  initial begin
    for (int a = 0; a < NWORDS; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = ($clog2(NWORDS))'(a); wdata = $urandom; m[a] = wdata;
    end
    @(negedge clk) we = 1'b0;
    for (int r = 0; r < NX; r++) begin
      row = ($clog2(NX))'(r);
      #1;
      for (int c = 0; c < NX; c++) chk("A", a_row[c], m[r * NX + c]);
      for (int c = 0; c < NU; c++) chk("B", b_row[c], m[25 + r * NU + c]);
      chk("Q", q_r, m[35 + r]);
      chk("R", r_r, (r < NU) ? m[40 + r] : FP_ZERO);
      chk("P", p_r, m[42 + r]);
      chk("x0", x0_r, m[47 + r]);
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

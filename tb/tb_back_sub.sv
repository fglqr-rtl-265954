// tb_back_sub: stores three random conditionals shaped like those of a
// left engine with horizon 2 (x_0 given u_0 and x_1; u_0 given x_1; x_1
// alone), runs back substitution over all three and compares with a
// double-precision back substitution done here. A second run preloads x_1
// through the solution write port and solves only conditionals 1..0,
// which must then use the preloaded value. The cycle count of each run is
// checked against FETCH + PREPARE + SOLVE + WRITE per row.
module tb_back_sub;
  import fp32_pkg::*;
  import fglqr_pkg::*;
  import tb_fp_util_pkg::*;
  localparam int NX = 5, NU = 2, N = 2, NCOND = 3, FMAX = 5, COLS = 13;
  localparam int NSOL = (N + 1) * NX + N * NU, CW = $clog2(NCOND), SW = $clog2(NSOL);
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic cw_en = 1'b0, ch_en = 1'b0, sw_en = 1'b0, start = 1'b0, busy, done;
  logic [CW-1:0] cw_idx = '0, ch_idx = '0, lo = '0, hi = '0;
  logic [$clog2(FMAX)-1:0] cw_row = '0;
  fp32_t cw_data [COLS], sw_data = '0, sr_data;
  cond_hdr_t ch_hdr = '0;
  logic [SW-1:0] sw_addr = '0, sr_addr = '0;
  back_sub #(.NX(NX), .NU(NU), .N(N), .NCOND(NCOND), .FMAX(FMAX), .COLS(COLS)) dut (.*);

  int checks = 0, failures = 0;
  real cm [NCOND][FMAX][COLS];
  cond_hdr_t hd [NCOND];
  real sol [NSOL];

  function automatic real rnd(input real lo_v, input real hi_v);
    int rv;
    rv = $urandom_range(10000);
    return fp2real(real2fp(lo_v + (hi_v - lo_v) * rv / 10000.0));
  endfunction

  function automatic int sep(input cond_hdr_t h, input int j);
    int k;
    k = j - int'(h.nf);
    return (k < int'(h.sep0_len)) ? int'(h.sep0_base) + k : int'(h.sep1_base) + k - int'(h.sep0_len);
  endfunction

  task automatic ref_solve(input int c);
    for (int i = int'(hd[c].nf) - 1; i >= 0; i--) begin
      real acc;
      acc = cm[c][i][hd[c].nf + hd[c].ns];
      for (int j = i + 1; j < int'(hd[c].nf + hd[c].ns); j++)
        acc -= cm[c][i][j] * ((j < int'(hd[c].nf)) ? sol[int'(hd[c].front_base) + j] : sol[sep(hd[c], j)]);
      sol[int'(hd[c].front_base) + i] = acc / cm[c][i][i];
    end
  endtask

  function automatic int expected_cycles(input int l, input int h);
    int n;
    n = 0;
    for (int c = l; c <= h; c++)
      for (int i = 0; i < int'(hd[c].nf); i++) n += 3 + int'(hd[c].nf + hd[c].ns) - 1 - i;
    return n;
  endfunction

  task automatic run(input int l, input int h);
    int t0;
    @(negedge clk);
    lo = CW'(l); hi = CW'(h); start = 1'b1;
    @(negedge clk) start = 1'b0;
    t0 = $time - 10;
    while (!done) @(posedge clk);
    checks++;
    if (($time - t0) / 10 != expected_cycles(l, h) + 1) begin
      failures++;
      $display("FAIL cycles %0d expected %0d", ($time - t0) / 10, expected_cycles(l, h) + 1);
    end
    for (int c = h; c >= l; c--) ref_solve(c);
    @(negedge clk);
    for (int a = 0; a < NSOL; a++) begin
      sr_addr = SW'(a);
      #1;
      checks++;
      if (!close(fp2real(sr_data), sol[a], 1e-4, 1e-5)) begin
        failures++;
        $display("FAIL sol[%0d] got %f want %f", a, fp2real(sr_data), sol[a]);
      end
    end
    @(negedge clk);
  endtask

  initial begin
    hd[0] = '{front_base: 0, nf: 5, ns: 7, sep0_base: 15, sep0_len: 2, sep1_base: 5};
    hd[1] = '{front_base: 15, nf: 2, ns: 5, sep0_base: 5, sep0_len: 5, sep1_base: 0};
    hd[2] = '{front_base: 5, nf: 5, ns: 0, sep0_base: 0, sep0_len: 0, sep1_base: 0};
    foreach (cm[c, i, j]) cm[c][i][j] = (j == i) ? rnd(1.0, 3.0) : (j > i ? rnd(-1.0, 1.0) : 0.0);
    foreach (sol[a]) sol[a] = 0.0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int a = 0; a < NSOL; a++) begin     // clear the solution memory
      sw_en = 1'b1; sw_addr = SW'(a); sw_data = FP_ZERO;
      @(negedge clk);
    end
    sw_en = 1'b0;
    for (int c = 0; c < NCOND; c++) begin
      ch_en = 1'b1; ch_idx = CW'(c); ch_hdr = hd[c];
      for (int i = 0; i < int'(hd[c].nf); i++) begin
        cw_en = 1'b1; cw_idx = CW'(c); cw_row = 3'(i);
        for (int j = 0; j < COLS; j++) cw_data[j] = real2fp(cm[c][i][j]);
        @(negedge clk);
        ch_en = 1'b0;
      end
    end
    cw_en = 1'b0;
    run(0, 2);
    // preload x_1 and solve the two outer conditionals only
    for (int i = 0; i < NX; i++) begin
      sol[5 + i] = rnd(-2.0, 2.0);
      sw_en = 1'b1; sw_addr = SW'(5 + i); sw_data = real2fp(sol[5 + i]);
      @(negedge clk);
    end
    sw_en = 1'b0;
    run(0, 1);
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

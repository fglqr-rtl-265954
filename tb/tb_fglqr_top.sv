// tb_fglqr_top: end-to-end test of the accelerator at a reduced horizon
// (N = 5, so the two engines get unequal halves: 4 and 6 eliminations).
// See tb_fglqr_core for what is checked.
module tb_fglqr_top;
  tb_fglqr_core #(.TN(5), .NRUNS(2), .MAX_CYCLES(40000)) u_core ();
endmodule

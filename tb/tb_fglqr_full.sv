// tb_fglqr_full: end-to-end test of the accelerator at its default size
// (horizon N = 50, 5 states, 2 controls, 4 Update units per QR block),
// one full LQR solve. See tb_fglqr_core for what is checked.
module tb_fglqr_full;
  tb_fglqr_core #(.TN(50), .NRUNS(1), .MAX_CYCLES(324000)) u_core ();
endmodule

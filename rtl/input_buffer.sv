// input_buffer: holds the LQR problem as loaded by the host: the state
// matrix A (NX x NX), the input matrix B (NX x NU), the diagonals of the
// weights Q (NX), R (NU) and P (NX), and the measured initial state x_init
// (NX), all single precision. The host writes one word per cycle; the
// whitening block reads one model row r per cycle (row r of A and B, Q_rr,
// P_rr, x_init_r and, for r < NU, R_rr) through an asynchronous row port.
// Word address map (this design's choice): A row-major from 0, then B
// row-major, then diag Q, diag R, diag P, x_init.
// Only diagonal Q, R and P are supported, as in the evaluated scenario
// (Q = I, R = I, P = 2^10 I).
module input_buffer
  import fp32_pkg::*;
  import fglqr_pkg::*;
#(
  parameter int NX = NX_DEF,
  parameter int NU = NU_DEF,
  localparam int NWORDS = NX * NX + NX * NU + 3 * NX + NU
) (
  input  logic                        clk,
  input  logic                        we,
  input  logic [$clog2(NWORDS)-1:0]   waddr,
  input  fp32_t                       wdata,
  input  logic [$clog2(NX)-1:0]       row,
  output fp32_t                       a_row [NX],
  output fp32_t                       b_row [NU],
  output fp32_t                       q_r,
  output fp32_t                       r_r,
  output fp32_t                       p_r,
  output fp32_t                       x0_r
);
  localparam int B_BASE = NX * NX;
  localparam int Q_BASE = B_BASE + NX * NU;
  localparam int R_BASE = Q_BASE + NX;
  localparam int P_BASE = R_BASE + NU;
  localparam int X_BASE = P_BASE + NX;

  fp32_t mem [NWORDS];

  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;

  always_comb begin
    for (int c = 0; c < NX; c++) a_row[c] = mem[int'(row) * NX + c];
    for (int c = 0; c < NU; c++) b_row[c] = mem[B_BASE + int'(row) * NU + c];
    q_r  = mem[Q_BASE + int'(row)];
    r_r  = (int'(row) < NU) ? mem[R_BASE + int'(row)] : FP_ZERO;
    p_r  = mem[P_BASE + int'(row)];
    x0_r = mem[X_BASE + int'(row)];
  end
endmodule

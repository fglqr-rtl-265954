// whitening: builds the whitened coefficient rows of every factor from the
// raw model in the input buffer and writes them into both engine RAMs.
//
// Each dynamics factor d_k = x_{k+1} - A x_k - B u_k is weighted by
// P^1/2. P is diagonal, so row r of A and of B is scaled by the single
// value P_rr^1/2, and all NX+NU products of a row are formed in the same
// cycle. P_rr must be a power of two with an even exponent (2^10 in the
// evaluated scenario): then P_rr^1/2 = 2^(e/2) and each "multiplication"
// is an addition to the exponent field (fp_scale2), with no multiplier.
// The cost factors need Q^1/2 and R^1/2; with diagonal Q and R these are
// element-wise square roots. The prior on x_0 uses the same weight as the
// dynamics (this design's choice: the reference design does not say how
// the measured state enters), so its right-hand side is P^1/2 x_init.
//
// Timing: after start, cycle r = 0..NX-1 writes dynamics row r, cycle NX
// the diagonal row and cycle NX+1 the prior row; done pulses with the last
// write. RAM row formats are described in fg_ram.
// Only RAM rows 0..NX+1 are written, so the top bit of ram_waddr (sized
// for the whole RAM) is constant zero; synthesis reports it as such.
module whitening
  import fp32_pkg::*;
  import fglqr_pkg::*;
#(
  parameter int NX   = NX_DEF,
  parameter int NU   = NU_DEF,
  parameter int COLS = 2 * NX_DEF + NU_DEF + 1,
  parameter int DEPTH = 3 * NX_DEF + NU_DEF + 2
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  // input buffer row port
  output logic [$clog2(NX)-1:0]    ib_row,
  input  fp32_t                    a_row [NX],
  input  fp32_t                    b_row [NU],
  input  fp32_t                    q_r,
  input  fp32_t                    r_r,
  input  fp32_t                    p_r,
  input  fp32_t                    x0_r,
  // RAM write port (broadcast to both engines)
  output logic                     ram_we,
  output logic [$clog2(DEPTH)-1:0] ram_waddr,
  output fp32_t                    ram_wdata [COLS]
);
  localparam int AW      = $clog2(DEPTH);
  localparam int A_DIAG  = 0;
  localparam int A_DYN   = 1;
  localparam int A_PRIOR = NX + 1;
  localparam int CW      = $clog2(NX + 2);

  logic          active;
  logic [CW-1:0] cyc;
  fp32_t         diag_row  [COLS];
  fp32_t         prior_row [COLS];
  int            half;

  assign busy   = active;
  assign ib_row = (int'(cyc) < NX) ? $clog2(NX)'(cyc) : '0;
  // P_rr = 2^e  ->  P_rr^1/2 = 2^(e/2)
  assign half   = (int'(p_r[30:23]) - 127) >>> 1;

  always_comb begin
    ram_we    = active;
    ram_waddr = '0;
    for (int c = 0; c < COLS; c++) ram_wdata[c] = FP_ZERO;
    if (int'(cyc) < NX) begin
      ram_waddr = AW'(A_DYN + int'(cyc));
      for (int c = 0; c < NX; c++) ram_wdata[c]      = fp_neg(fp_scale2(a_row[c], half));
      for (int c = 0; c < NU; c++) ram_wdata[NX + c] = fp_neg(fp_scale2(b_row[c], half));
      ram_wdata[NX + NU] = fp_pow2(half);
    end else if (int'(cyc) == NX) begin
      ram_waddr = AW'(A_DIAG);
      ram_wdata = diag_row;
    end else begin
      ram_waddr = AW'(A_PRIOR);
      ram_wdata = prior_row;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      active <= 1'b0;
      done   <= 1'b0;
      cyc    <= '0;
      for (int c = 0; c < COLS; c++) begin
        diag_row[c]  <= FP_ZERO;
        prior_row[c] <= FP_ZERO;
      end
    end else begin
      done <= 1'b0;
      if (!active) begin
        if (start) begin
          active <= 1'b1;
          cyc    <= '0;
        end
      end else begin
        if (int'(cyc) < NX) begin
          diag_row[cyc]  <= fp_sqrt(q_r);
          if (int'(cyc) < NU) diag_row[NX + int'(cyc)] <= fp_sqrt(r_r);
          prior_row[cyc] <= fp_scale2(x0_r, half);
        end
        if (int'(cyc) == NX + 1) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
        cyc <= cyc + 1'b1;
      end
    end
  end
endmodule

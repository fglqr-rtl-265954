// back_sub: back-substitution block. Every eliminated variable leaves a
// conditional R * v = d - S * s, with R upper triangular (nf x nf), S the
// coupling to already-solved separator variables s and d the transformed
// right-hand side. Processing the conditionals in reverse elimination
// order solves all states and controls.
//
// Each row i of a conditional (bottom row first) passes four stages:
//   FETCH    read the stored row [R_i | S_i | d_i]
//   PREPARE  acc = d_i - sum_{j>i} row_j * sol_j, one multiply-subtract per
//            cycle; sol_j is a frontal value just solved or a separator
//            value from the solution memory
//   SOLVE    v_i = acc / R_ii
//   WRITE    store v_i in the solution memory
// The stage split and the PREPARE/SOLVE operations follow the reference
// design; running the stages one after the other for each row (rather than
// overlapping rows) is this design's simplification.
//
// Storage: cond_mem holds up to NCOND conditionals of FMAX rows x COLS
// words, hdr_mem their headers (fglqr_pkg::cond_hdr_t), sol_mem the whole
// solution vector, x_k at k*NX, u_k at (N+1)*NX + k*NU. The solution
// memory has a preload port (for a separator solved elsewhere) and an
// asynchronous read port. Control: pulse start with the conditional range
// lo..hi; they are solved from hi down to lo; done pulses at the end.
module back_sub
  import fp32_pkg::*;
  import fglqr_pkg::*;
#(
  parameter int NX    = NX_DEF,
  parameter int NU    = NU_DEF,
  parameter int N     = N_DEF,
  parameter int NCOND = N_DEF + 1,
  parameter int FMAX  = NX_DEF,
  parameter int COLS  = 2 * NX_DEF + NU_DEF + 1,
  localparam int NSOL = (N + 1) * NX + N * NU,
  localparam int CW   = $clog2(NCOND),
  localparam int SW   = $clog2(NSOL)
) (
  input  logic                      clk,
  input  logic                      rst,
  // conditional rows and headers
  input  logic                      cw_en,
  input  logic [CW-1:0]             cw_idx,
  input  logic [$clog2(FMAX)-1:0]   cw_row,
  input  fp32_t                     cw_data [COLS],
  input  logic                      ch_en,
  input  logic [CW-1:0]             ch_idx,
  input  cond_hdr_t                 ch_hdr,
  // solution memory
  input  logic                      sw_en,
  input  logic [SW-1:0]             sw_addr,
  input  fp32_t                     sw_data,
  input  logic [SW-1:0]             sr_addr,
  output fp32_t                     sr_data,
  // control
  input  logic                      start,
  input  logic [CW-1:0]             lo,
  input  logic [CW-1:0]             hi,
  output logic                      busy,
  output logic                      done
);
  localparam int FW = $clog2(FMAX);

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_PREP, S_SOLVE, S_WRITE} state_e;
  state_e state;

  fp32_t     cond_mem [NCOND * FMAX][COLS];
  cond_hdr_t hdr_mem  [NCOND];
  fp32_t     sol_mem  [NSOL];

  logic [CW-1:0] c, c_lo;
  logic [FW-1:0] row;
  logic [3:0]    j;
  fp32_t         rowbuf [COLS];
  fp32_t         front_sol [FMAX];
  fp32_t         acc;
  cond_hdr_t     hdr;

  assign busy    = (state != S_IDLE);
  assign sr_data = sol_mem[sr_addr];

  // operand of the current PREPARE step
  fp32_t         operand;
  logic [15:0]   sep_addr;
  always_comb begin
    int k;
    k = int'(j) - int'(hdr.nf);
    if (k < int'(hdr.sep0_len)) sep_addr = hdr.sep0_base + 16'(k);
    else                        sep_addr = hdr.sep1_base + 16'(k - int'(hdr.sep0_len));
    operand = (j < hdr.nf) ? front_sol[FW'(j)] : sol_mem[SW'(sep_addr)];
  end

  always_ff @(posedge clk) begin
    if (cw_en) cond_mem[int'(cw_idx) * FMAX + int'(cw_row)] <= cw_data;
    if (ch_en) hdr_mem[ch_idx] <= ch_hdr;
  end

  always_ff @(posedge clk) begin
    if (sw_en) sol_mem[sw_addr] <= sw_data;
    if (state == S_WRITE) sol_mem[SW'(hdr.front_base + 16'(row))] <= acc;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      done  <= 1'b0;
      c     <= '0;
      c_lo  <= '0;
      row   <= '0;
      j     <= '0;
      acc   <= FP_ZERO;
      hdr   <= '0;
      for (int r = 0; r < COLS; r++) rowbuf[r] <= FP_ZERO;
      for (int r = 0; r < FMAX; r++) front_sol[r] <= FP_ZERO;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c     <= hi;
          c_lo  <= lo;
          hdr   <= hdr_mem[hi];
          row   <= FW'(hdr_mem[hi].nf - 1'b1);
          state <= S_FETCH;
        end
        S_FETCH: begin
          rowbuf <= cond_mem[int'(c) * FMAX + int'(row)];
          acc    <= cond_mem[int'(c) * FMAX + int'(row)][hdr.nf + hdr.ns];
          j      <= 4'(row) + 1'b1;
          state  <= (4'(row) + 1'b1 == hdr.nf + hdr.ns) ? S_SOLVE : S_PREP;
        end
        S_PREP: begin
          acc <= fp_sub(acc, fp_mul(rowbuf[j], operand));
          j   <= j + 1'b1;
          if (j + 1'b1 == hdr.nf + hdr.ns) state <= S_SOLVE;
        end
        S_SOLVE: begin
          acc   <= fp_div(acc, rowbuf[row]);
          state <= S_WRITE;
        end
        S_WRITE: begin
          front_sol[row] <= acc;
          if (row != '0) begin
            row   <= row - 1'b1;
            state <= S_FETCH;
          end else if (c == c_lo) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            c     <= c - 1'b1;
            hdr   <= hdr_mem[c - 1'b1];
            row   <= FW'(hdr_mem[c - 1'b1].nf - 1'b1);
            state <= S_FETCH;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_range: assert property (@(posedge clk) disable iff (rst) start |-> lo <= hi);
endmodule

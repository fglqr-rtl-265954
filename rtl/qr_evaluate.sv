// qr_evaluate: the Evaluate unit of the partial QR block. Given one matrix
// column and its pivot row p, it builds the Householder reflection
// H = I - beta * v * v^T that zeroes the entries of that column below p.
//
//   sumsq = sum_{i>=p} a_i^2        (one multiply-add per cycle)
//   norm  = sqrt(sumsq)
//   alpha = -sign(a_p) * norm       (new value of the pivot entry)
//   v     = a with rows < p cleared and v_p = a_p - alpha
//   beta  = 2 / |v|^2 = 1 / (sumsq + |a_p| * norm)
//
// A column that is already zero below and at the pivot gives beta = 0,
// which makes the Update units leave the other columns unchanged.
// The finished column (rows < p untouched, alpha at p, zeros below) is
// presented on r_col; v, beta and r_col stay valid from done until the next
// start. Timing: start is accepted in IDLE; done pulses ROWS-p+3 cycles
// later. The reflection formulas are the textbook Householder step the
// reference design names; the sequential one-operator datapath is this
// design's choice.
module qr_evaluate
  import fp32_pkg::*;
#(
  parameter int ROWS = 15
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    start,
  input  logic [$clog2(ROWS)-1:0] pivot,
  input  fp32_t                   col_in [ROWS],
  output logic                    busy,
  output logic                    done,
  output fp32_t                   v      [ROWS],
  output fp32_t                   beta,
  output fp32_t                   r_col  [ROWS]
);
  localparam int RW = $clog2(ROWS);

  typedef enum logic [2:0] {S_IDLE, S_ACC, S_ROOT, S_BETA} state_e;
  state_e state;

  fp32_t          col [ROWS];
  fp32_t          sumsq, norm;
  logic [RW-1:0]  p, i;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      done  <= 1'b0;
      sumsq <= FP_ZERO;
      norm  <= FP_ZERO;
      beta  <= FP_ZERO;
      p     <= '0;
      i     <= '0;
      for (int r = 0; r < ROWS; r++) begin
        col[r]   <= FP_ZERO;
        v[r]     <= FP_ZERO;
        r_col[r] <= FP_ZERO;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          col   <= col_in;
          p     <= pivot;
          i     <= pivot;
          sumsq <= FP_ZERO;
          state <= S_ACC;
        end
        S_ACC: begin
          sumsq <= fp_mac(sumsq, col[i], col[i]);
          if (i == RW'(ROWS - 1)) state <= S_ROOT;
          else i <= i + 1'b1;
        end
        S_ROOT: begin
          norm  <= fp_sqrt(sumsq);
          state <= S_BETA;
        end
        S_BETA: begin
          for (int r = 0; r < ROWS; r++) begin
            v[r]     <= (r < int'(p)) ? FP_ZERO : col[r];
            r_col[r] <= (r < int'(p)) ? col[r] : FP_ZERO;
          end
          if (fp_is_zero(sumsq)) begin
            beta     <= FP_ZERO;
            r_col[p] <= col[p];
          end else begin
            // v_p = a_p + sign(a_p) * norm ; alpha = -sign(a_p) * norm
            v[p]     <= fp_sub(col[p], {~col[p][31], norm[30:0]});
            r_col[p] <= {~col[p][31], norm[30:0]};
            beta     <= fp_div(FP_ONE, fp_add(sumsq, fp_mul(fp_abs(col[p]), norm)));
          end
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule

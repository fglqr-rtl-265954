// qr_update: one Update unit of the partial QR block. It applies the
// current Householder reflection to one matrix column at a time:
//
//   s   = beta * (v . a)          (DOT: one multiply-add per cycle)
//   a_i = a_i - s * v_i, i >= p   (AXPY: one multiply-add per cycle)
//
// Rows above the pivot p are not touched (v is zero there). The reflection
// (v, beta, p) comes from the Evaluate unit and must stay stable while the
// unit is busy. Columns arrive and leave as whole vectors with a
// valid/ready handshake; the column index and iteration tag travel with the
// data unchanged except that the tag is incremented on the way out.
// Timing: 2*(ROWS-p)+2 cycles from accepting a column to presenting it.
// The sequential datapath and the handshake are this design's choice.
module qr_update
  import fp32_pkg::*;
#(
  parameter int ROWS = 15,
  parameter int IW   = 4,   // column-index width
  parameter int TW   = 5    // iteration-tag width
) (
  input  logic                    clk,
  input  logic                    rst,
  // reflection
  input  fp32_t                   hh_v [ROWS],
  input  fp32_t                   hh_beta,
  input  logic [$clog2(ROWS)-1:0] hh_p,
  // column in
  input  logic                    in_valid,
  output logic                    in_ready,
  input  fp32_t                   in_data [ROWS],
  input  logic [IW-1:0]           in_idx,
  input  logic [TW-1:0]           in_tag,
  // column out
  output logic                    out_valid,
  input  logic                    out_ready,
  output fp32_t                   out_data [ROWS],
  output logic [IW-1:0]           out_idx,
  output logic [TW-1:0]           out_tag,
  output logic                    busy
);
  localparam int RW = $clog2(ROWS);

  typedef enum logic [2:0] {S_IDLE, S_DOT, S_SCALE, S_AXPY, S_OUT} state_e;
  state_e state;

  fp32_t         acc;
  logic [RW-1:0] i;

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_OUT);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= S_IDLE;
      acc     <= FP_ZERO;
      i       <= '0;
      out_idx <= '0;
      out_tag <= '0;
      for (int r = 0; r < ROWS; r++) out_data[r] <= FP_ZERO;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          out_data <= in_data;
          out_idx  <= in_idx;
          out_tag  <= in_tag + 1'b1;
          acc      <= FP_ZERO;
          i        <= hh_p;
          state    <= S_DOT;
        end
        S_DOT: begin
          acc <= fp_mac(acc, hh_v[i], out_data[i]);
          if (i == RW'(ROWS - 1)) state <= S_SCALE;
          else i <= i + 1'b1;
        end
        S_SCALE: begin
          acc   <= fp_mul(hh_beta, acc);
          i     <= hh_p;
          state <= S_AXPY;
        end
        S_AXPY: begin
          out_data[i] <= fp_sub(out_data[i], fp_mul(acc, hh_v[i]));
          if (i == RW'(ROWS - 1)) state <= S_OUT;
          else i <= i + 1'b1;
        end
        S_OUT: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule

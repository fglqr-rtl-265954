// qr_fifo: one of the FIFOs that link the Update units of the partial QR
// block into a ring. Each entry is one whole matrix column (its data rows,
// column index and iteration tag packed into W bits), so a column moves
// between units in a single cycle.
//
// Synchronous FIFO, first-word-fall-through: rd_data shows the head entry
// whenever empty is low. push and pop may occur in the same cycle. Pushing
// when full or popping when empty is a protocol error (asserted).
// The depth is this design's choice: it must hold every column one unit
// can own, ceil((COLS-1)/N_UPD) columns, plus one.
module qr_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         push,
  input  logic [W-1:0] wr_data,
  input  logic         pop,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic         full
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;

  assign empty   = (cnt == '0);
  assign full    = (cnt == (AW+1)'(DEPTH));
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (rst) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) begin
        mem[wp] <= wr_data;
        wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      end
      if (pop) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) !(pop && empty));
endmodule

// fg_ram: the matrix RAM of one engine (RAM_1 / RAM_2 of the accelerator).
// One word is one matrix row of COLS single-precision values, so a whole
// row is written or read in one cycle. It holds the whitened model rows
// written by the whitening block and the factor that one elimination
// passes to the next. One write port and one synchronous read port
// (read data appears the cycle after the address), as a block RAM has.
// Word layout (set by the engine): 0 diagonal row [sqrt(Q) | sqrt(R)],
// 1..NX dynamics rows [-P^1/2 A | -P^1/2 B | P^1/2], NX+1 prior row
// [P^1/2 x_init], then NX+NU rows of the carried factor and NX rows of a
// factor imported from the other engine.
module fg_ram
  import fp32_pkg::*;
#(
  parameter int COLS  = 13,
  parameter int DEPTH = 19
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  fp32_t                    wdata [COLS],
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output fp32_t                    rdata [COLS]
);
  fp32_t mem [DEPTH][COLS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule

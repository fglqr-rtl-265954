// tb_fg_ram: writes random rows to every address, then reads them back in
// random order, checking the one-cycle read latency and the data.
module tb_fg_ram;
  import fp32_pkg::*;
  localparam int COLS = 13, DEPTH = 19, AW = $clog2(DEPTH);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  fp32_t wdata [COLS], rdata [COLS];
  fg_ram #(.COLS(COLS), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  fp32_t model [DEPTH][COLS];

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a);
      for (int c = 0; c < COLS; c++) begin wdata[c] = $urandom; model[a][c] = wdata[c]; end
    end
    @(negedge clk) we = 1'b0;
    for (int i = 0; i < 200; i++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      raddr = AW'(a);
      if (i % 3 == 0) begin   // concurrent write elsewhere must not disturb the read
        we = 1'b1; waddr = AW'((a + 1) % DEPTH);
        for (int c = 0; c < COLS; c++) wdata[c] = $urandom;
      end else we = 1'b0;
      @(posedge clk);
      #1;
      if (we) for (int c = 0; c < COLS; c++) model[(a + 1) % DEPTH][c] = wdata[c];
      checks++;
      if (rdata != model[a]) begin failures++; if (failures < 10) $display("FAIL addr %0d", a); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

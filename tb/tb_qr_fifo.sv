// tb_qr_fifo: random push/pop traffic against a queue model; checks the
// head data, empty and full flags every cycle.
module tb_qr_fifo;
  localparam int W = 16, DEPTH = 4;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic push = 1'b0, pop = 1'b0, empty, full;
  logic [W-1:0] wr_data = '0, rd_data;
  qr_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] q [$];

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == DEPTH) ||
          (q.size() > 0 && rd_data != q[0])) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d size %0d empty %0b full %0b", i, q.size(), empty, full);
      end
      pop     = (q.size() > 0) && ($urandom_range(2) != 0);
      push    = (q.size() < DEPTH || pop) && ($urandom_range(2) != 0);
      wr_data = W'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wr_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

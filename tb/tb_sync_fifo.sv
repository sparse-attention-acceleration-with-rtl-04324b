// tb_sync_fifo: a 5-entry, 8-bit FIFO driven with random pushes and pops
// (never pushing when full or popping when empty) against a queue model:
// the show-ahead output, empty and full flags are checked every cycle, and
// clr must empty it.
module tb_sync_fifo;
  localparam int unsigned DEPTH = 5;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic clr = 0, push = 0, pop = 0;
  logic [7:0] din = '0, dout;
  logic empty, full;
  sync_fifo #(.W(8), .DEPTH(DEPTH)) dut (.*);
  int checks = 0, failures = 0;
  logic [7:0] m [$];
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      checks++;
      if (empty != (m.size() == 0) || full != (m.size() == DEPTH) ||
          (m.size() != 0 && dout != m[0])) begin
        failures++;
        if (failures < 5) $display("FAIL cycle %0d size %0d empty %0d full %0d", c, m.size(), empty, full);
      end
      clr  = (c % 500 == 499);
      push = !full && ($urandom % 2 == 1);
      pop  = !empty && ($urandom % 3 != 0);
      din  = 8'($urandom);
      @(posedge clk);
      if (clr) m.delete();
      else begin
        if (pop) void'(m.pop_front());
        if (push) m.push_back(din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_kv_buffer: writes random 512-bit words into a 4-bank buffer, reads them
// back in random order and checks each word one cycle after its address, and
// that a write cycle does not disturb the data of other slots.
module tb_kv_buffer;
  localparam int unsigned NB = 4, DEPTH = 128;
  logic clk = 0, we = 0;
  logic [6:0] addr = 0;
  logic [NB*128-1:0] wdata = 0, rdata;
  logic [NB*128-1:0] model [DEPTH];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  kv_buffer #(.NBANK(NB), .BANK_W(128), .DEPTH(DEPTH)) dut (.*);
  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; addr = 7'(a);
      for (int w = 0; w < NB * 4; w++) wdata[w*32 +: 32] = $urandom;
      model[a] = wdata;
    end
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      we = 0; addr = 7'($urandom);
      @(negedge clk);
      checks++;
      if (rdata != model[addr]) failures++;
      if (n % 7 == 0) begin   // interleave a write
        we = 1; addr = 7'($urandom);
        for (int w = 0; w < NB * 4; w++) wdata[w*32 +: 32] = $urandom;
        model[addr] = wdata;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

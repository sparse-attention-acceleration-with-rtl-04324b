// tb_mrg: drives one request generator (base 5 of 16 channels, 256 keys) with
// random vectors and a randomly stalling consumer. The emitted key indices
// must be exactly the set bits at positions 5, 21, 37, ... in increasing
// order, and with an always-ready consumer a full scan must take 256/16 = 16
// cycles (one bit per cycle).
module tb_mrg;
  localparam int unsigned S = 256, NCH = 16;
  logic clk = 0, rst_n = 0, start = 0, idx_valid, idx_ready, done;
  logic [S-1:0] vec;
  logic [3:0] base = 4'd5;
  logic [7:0] idx;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  mrg #(.S(S), .NCH(NCH)) dut (.*);
  task automatic scan(input bit stall);
    int exp_list [$];
    int n, cyc;
    for (int j = base; j < S; j += NCH) if (vec[j]) exp_list.push_back(j);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    n = 0; cyc = 0;
    while (!done) begin
      idx_ready = stall ? 1'($urandom) : 1'b1;
      @(posedge clk);
      cyc++;
      if (idx_valid && idx_ready) begin
        checks++;
        if (n >= exp_list.size() || int'(idx) != exp_list[n]) failures++;
        n++;
      end
      @(negedge clk);
    end
    checks++;
    if (n != exp_list.size()) failures++;
    if (!stall) begin
      checks++;
      if (cyc != S / NCH) begin failures++; $display("scan took %0d cycles", cyc); end
    end
  endtask
  initial begin
    idx_ready = 1;
    vec = '0;
    #5 rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      for (int w = 0; w < S / 32; w++) vec[w*32 +: 32] = $urandom;
      base = 4'($urandom);
      scan(r % 2 == 1);
    end
    vec = '1; scan(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

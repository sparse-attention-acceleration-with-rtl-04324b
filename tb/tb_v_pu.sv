// tb_v_pu: accumulates random (probability, value vector) pairs and checks
// the 16-bit saturated attention vector against an integer reference after
// every pair, including large probabilities that drive it into saturation,
// and that clr restarts the sum.
module tb_v_pu;
  import sprint_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, p_valid = 0;
  logic [7:0] prob = 0;
  logic [VEC_W-1:0] v = 0;
  logic [D*OUT_W-1:0] out_vec;
  int acc [D];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  v_pu dut (.*);
  task automatic check();
    for (int i = 0; i < D; i++) begin
      int a = acc[i];
      if (a > 32767) a = 32767;
      if (a < -32768) a = -32768;
      checks++;
      if (out_vec[i*16 +: 16] != 16'(a)) failures++;
    end
  endtask
  initial begin
    #5 rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      @(negedge clk) clr = 1;
      @(negedge clk) clr = 0;
      for (int i = 0; i < D; i++) acc[i] = 0;
      for (int n = 0; n < 40; n++) begin
        p_valid = 1;
        prob = (r == 2) ? 8'd255 : 8'($urandom % 40);
        for (int w = 0; w < 16; w++) v[w*32 +: 32] = $urandom;
        for (int i = 0; i < D; i++) acc[i] += int'(prob) * int'($signed(v[i*8 +: 8]));
        @(negedge clk);
        p_valid = 0;
        check();
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

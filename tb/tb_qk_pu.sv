// tb_qk_pu: loads random queries into the Q-buf, streams random keys (given
// as MSB and LSB nibbles) one per cycle and checks each 12-bit score, one
// cycle later, against the full 8-bit dot product shifted right by 3 and
// saturated. Extreme vectors (all +127 / all -128) exercise saturation.
module tb_qk_pu;
  import sprint_pkg::*;
  logic clk = 0, rst_n = 0, q_load = 0, k_valid = 0, s_valid;
  logic [VEC_W-1:0] q_in = 0, kfull;
  logic [NIB_W-1:0] k_msb = 0, k_lsb = 0;
  logic [6:0] k_tag = 0, s_tag;
  logic signed [11:0] score;
  int exp_q [$];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  qk_pu dut (.*);
  function automatic int ref_score(logic [VEC_W-1:0] q, logic [VEC_W-1:0] k);
    int s = 0;
    for (int i = 0; i < D; i++) s += int'($signed(q[i*8 +: 8])) * int'($signed(k[i*8 +: 8]));
    s = s >>> 3;
    if (s > 2047) s = 2047;
    if (s < -2048) s = -2048;
    return s;
  endfunction
  int e;
  always @(posedge clk) if (rst_n && s_valid) begin
    checks++;
    if (exp_q.size() == 0) failures++;
    else begin
      e = exp_q.pop_front();
      if (int'(score) != e) begin
        failures++;
        $display("score %0d expected %0d", score, e);
      end
    end
  end
  initial begin
    #5 rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      @(negedge clk);
      q_load = 1;
      for (int w = 0; w < 16; w++) q_in[w*32 +: 32] = (r == 4) ? 32'h7f7f7f7f : (r == 5) ? 32'h80808080 : $urandom;
      @(negedge clk);
      q_load = 0;
      for (int n = 0; n < 30; n++) begin
        for (int w = 0; w < 16; w++) kfull[w*32 +: 32] = (r >= 4 && n == 0) ? 32'h7f7f7f7f : ((r % 2 == 1) ? ($urandom & 32'h1f1f1f1f) - 32'h08080808 : $urandom);
        for (int i = 0; i < D; i++) begin
          k_msb[i*4 +: 4] = kfull[i*8 + 4 +: 4];
          k_lsb[i*4 +: 4] = kfull[i*8 +: 4];
        end
        k_valid = 1; k_tag = 7'(n);
        exp_q.push_back(ref_score(q_in, kfull));
        @(negedge clk);
      end
      k_valid = 0;
      @(negedge clk);
    end
    @(negedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
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

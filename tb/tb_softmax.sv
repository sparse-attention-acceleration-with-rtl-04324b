// tb_softmax: feeds groups of random 12-bit scores (with random gaps, some
// saturated at +-2047/-2048, group sizes 1..128) and checks every
// probability against a reference built from exp tables computed here with
// $exp: e = exp_hi[u/64] * exp_lo[u%64] with u = 2047 - score, and
// prob = min(255, e*256 / sum). Probabilities must leave in arrival order
// with their tags, one per cycle, and done must rise after the last one.
module tb_softmax;
  import sprint_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic clr = 0, s_valid = 0;
  logic [7:0] n_total = '0;
  logic signed [SCORE_W-1:0] score = '0;
  logic [6:0] s_tag = '0;
  logic p_valid, done;
  logic [PROB_W-1:0] prob;
  logic [6:0] p_tag;
  softmax #(.TAG_W(7), .FIFO_DEPTH(128), .CNT_W(8)) dut (.*);

  int checks = 0, failures = 0;
  int exp_hi [64], exp_lo [64];

  task automatic group(input int n);
    int sc [$], e [$], sum, got, last, gaps;
    bit first;
    sum = 0;
    for (int k = 0; k < n; k++) begin
      int s, u;
      case ($urandom % 8)
        0: s = 2047;
        1: s = -2048;
        default: s = int'($urandom % 348) + 1700;
      endcase
      if ($urandom % 5 == 0) s = int'($urandom % 4096) - 2048;
      sc.push_back(s);
      u = 2047 - s;
      e.push_back(exp_hi[u / 64] * exp_lo[u % 64]);
      sum += e[k];
    end
    @(negedge clk) clr = 1; n_total = 8'(n);
    @(negedge clk) clr = 0;
    for (int k = 0; k < n; k++) begin
      if ($urandom % 3 == 0) repeat ($urandom % 3) @(negedge clk);
      s_valid = 1; score = SCORE_W'(sc[k]); s_tag = 7'(k);
      @(negedge clk);
      s_valid = 0;
    end
    got = 0; gaps = 0; first = 1;
    for (int c = 0; c < 1000 && !(done && got == n); c++) begin
      @(posedge clk);
      if (p_valid) begin
        int p;
        p = (e[got] * 256) / sum;
        if (p > 255) p = 255;
        checks++;
        if (got >= n || int'(prob) != p || int'(p_tag) != got) begin
          failures++;
          if (failures < 6) $display("FAIL n=%0d k=%0d prob %0d exp %0d tag %0d", n, got, prob, p, p_tag);
        end
        got++;
        first = 0;
      end else if (!first && got < n) gaps++;
    end
    checks += 2;
    if (got != n) begin failures++; $display("FAIL n=%0d got %0d probabilities", n, got); end
    if (gaps != 0) begin failures++; $display("FAIL n=%0d %0d idle cycles inside the stream", n, gaps); end
  endtask

  initial begin
    for (int h = 0; h < 64; h++) begin
      exp_hi[h] = int'($floor(255.0 * $exp(-h / 4.0) + 0.5));
      exp_lo[h] = int'($floor(255.0 * $exp(-h / 256.0) + 0.5));
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    group(1);
    group(2);
    group(128);
    for (int g = 0; g < 20; g++) group(1 + $urandom % 128);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

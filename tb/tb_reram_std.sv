// tb_reram_std: checks one standard ReRAM channel model with 16 rows. Random
// query, key-LSB and value vectors are written; random reads of either kind
// are issued as soon as req_ready allows. Each response must carry the data
// of the requested row and arrive T_RCD + T_CL + 8 cycles (query) or
// T_RCD + T_CL + 12 cycles (key LSBs + value) after the request is accepted;
// req_ready must be low while a read is outstanding.
module tb_reram_std;
  import sprint_pkg::*;
  localparam int unsigned R = 16;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic wr_en = 0, req_valid = 0, req_kv = 0;
  logic [3:0] wr_row = '0, req_row = '0;
  logic [VEC_W-1:0] wr_q = '0, wr_v = '0;
  logic [NIB_W-1:0] wr_klsb = '0;
  logic req_ready, resp_valid;
  logic [VEC_W-1:0] resp_q, resp_v;
  logic [NIB_W-1:0] resp_klsb;
  reram_std #(.ROWS(R)) dut (.*);

  int checks = 0, failures = 0;
  logic [VEC_W-1:0] mq [R], mv [R];
  logic [NIB_W-1:0] mk [R];

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < R; r++) begin
      for (int w = 0; w < VEC_W / 32; w++) begin mq[r][w*32 +: 32] = $urandom; mv[r][w*32 +: 32] = $urandom; end
      for (int w = 0; w < NIB_W / 32; w++) mk[r][w*32 +: 32] = $urandom;
      @(negedge clk) wr_en = 1; wr_row = 4'(r); wr_q = mq[r]; wr_klsb = mk[r]; wr_v = mv[r];
    end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 60; n++) begin
      int r, lat, el;
      bit kv;
      r = $urandom % R; kv = 1'($urandom);
      while (!req_ready) @(negedge clk);
      req_valid = 1; req_kv = kv; req_row = 4'(r);
      @(negedge clk) req_valid = 0;
      el = 0;
      while (!resp_valid) begin
        checks++;
        if (req_ready) failures++;
        el++;
        @(negedge clk);
        if (el > 100) break;
      end
      lat = T_RCD + T_CL + (kv ? 12 : 8);
      checks++;
      if (el != lat) begin failures++; $display("FAIL latency %0d exp %0d", el, lat); end
      checks++;
      if (kv ? (resp_klsb != mk[r] || resp_v != mv[r]) : (resp_q != mq[r])) begin
        failures++; $display("FAIL data row %0d kv %0d", r, kv);
      end
      if ($urandom % 2) repeat ($urandom % 4) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_tarray: checks the transposable-array model at 256 columns. Random 4-bit
// key nibbles are written column by column; for several random queries and
// thresholds the query is copied in with four CopyQ commands (start bit on
// the last). The test checks that busy lasts exactly T_AXTH cycles, that
// every ReadP chunk equals a reference pruning vector (dot product below the
// threshold = pruned) and that TRead returns the stored column, both exactly
// T_CL cycles after the command.
module tb_tarray;
  import sprint_pkg::*;
  localparam int unsigned NC = 256;
  localparam int unsigned AW = $clog2(NC);
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic wr_en = 0, th_we = 0, cmd_valid = 0, cmd_start = 0;
  logic [AW-1:0] wr_col = '0, cmd_addr = '0;
  logic [NIB_W-1:0] wr_data = '0;
  logic signed [15:0] th = '0;
  mem_cmd_e cmd = CMD_NOP;
  logic [CH_W-1:0] cmd_wdata = '0;
  logic busy, rd_valid;
  logic [NIB_W-1:0] rd_data;
  tarray #(.NCOL(NC)) dut (.*);

  int checks = 0, failures = 0;
  logic [NIB_W-1:0] km [NC];
  logic [NIB_W-1:0] q;
  int cyc = 0;
  int issue_t [$];
  logic [NIB_W-1:0] exp_d [$];
  // response checker: data and latency. cyc counts rising edges; a command
  // set up after edge n is taken at edge n+1 and its data are sampled at
  // edge n+1+T_CL.
  always @(posedge clk) begin
    cyc++;
    if (rst_n && rd_valid) begin
    checks++;
    if (exp_d.size() == 0) failures++;
    else begin
      if (rd_data != exp_d.pop_front() || cyc - issue_t.pop_front() != T_CL + 1) begin
        failures++;
        if (failures < 5) $display("FAIL read at cycle %0d", cyc);
      end
    end
    end
  end

  function automatic logic [NC-1:0] ref_p(input int t);
    logic [NC-1:0] p;
    for (int j = 0; j < NC; j++) begin
      int a = 0;
      for (int i = 0; i < D; i++) a += int'($signed(q[i*4 +: 4])) * int'($signed(km[j][i*4 +: 4]));
      p[j] = a < t;
    end
    return p;
  endfunction

  task automatic one_query(input int t);
    logic [NC-1:0] p;
    int bc;
    for (int w = 0; w < NIB_W / 32; w++) q[w*32 +: 32] = $urandom;
    @(negedge clk) th_we = 1; th = 16'(t);
    @(negedge clk) th_we = 0;
    for (int c = 0; c < 4; c++) begin
      cmd_valid = 1; cmd = CMD_COPYQ; cmd_addr = AW'(c); cmd_start = (c == 3);
      cmd_wdata = q[c*64 +: 64];
      @(negedge clk);
    end
    cmd_valid = 0; cmd_start = 0; cmd = CMD_NOP;
    bc = 0;
    while (busy) begin bc++; @(negedge clk); end
    checks++;
    if (bc != T_AXTH) begin failures++; $display("FAIL busy %0d cycles", bc); end
    p = ref_p(t);
    for (int c = 0; c < NC / 64; c++) begin
      cmd_valid = 1; cmd = CMD_READP; cmd_addr = AW'(c);
      exp_d.push_back(NIB_W'(p[c*64 +: 64])); issue_t.push_back(cyc);
      @(negedge clk);
    end
    for (int k = 0; k < 8; k++) begin
      int j = $urandom % NC;
      cmd_valid = 1; cmd = CMD_TREAD; cmd_addr = AW'(j);
      exp_d.push_back(km[j]); issue_t.push_back(cyc);
      @(negedge clk);
    end
    cmd_valid = 0; cmd = CMD_NOP;
    repeat (T_CL + 2) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < NC; j++) begin
      for (int w = 0; w < NIB_W / 32; w++) km[j][w*32 +: 32] = $urandom;
      @(negedge clk) wr_en = 1; wr_col = AW'(j); wr_data = km[j];
    end
    @(negedge clk) wr_en = 0;
    one_query(0);
    one_query(20);
    one_query(-20);
    one_query(32767);
    one_query(-32768);
    for (int k = 0; k < 5; k++) one_query(int'($urandom % 81) - 40);
    checks++;
    if (exp_d.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

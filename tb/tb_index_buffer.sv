// tb_index_buffer: index buffer with 256 tokens and 8 slots. Each round
// loads a random pruning vector (first round and some later ones with the
// flush bit), waits for the eviction scan, then allocates slots for the
// unpruned tokens that are not on chip, up to the capacity. A reference set
// of on-chip tokens is kept: after a scan it must equal the previous set
// minus the newly pruned tokens (empty after a flush). The lookup is checked
// for every token (hit exactly for on-chip tokens, returning the slot it was
// given), allocated slots must never collide with a live slot, the unpruned
// vector must be the inverted pruning vector and the scan must take CAP
// cycles.
module tb_index_buffer;
  timeunit 1ns;
  timeprecision 100ps;
  localparam int unsigned S = 256, CAP = 8;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic q_start = 0, flush = 0, alloc_req = 0;
  logic [S-1:0] p_cur = '0;
  logic evict_done, alloc_ok, lk_hit;
  logic [S-1:0] unpruned;
  logic [7:0] alloc_tok = '0, lk_tok = '0;
  logic [2:0] alloc_slot, lk_slot;
  index_buffer #(.S(S), .CAP(CAP)) dut (.*);

  int checks = 0, failures = 0;
  bit on [S];
  int slot_of [S];

  task automatic check_lookup();
    bit used [CAP];
    for (int k = 0; k < CAP; k++) used[k] = 0;
    for (int j = 0; j < S; j++) begin
      lk_tok = 8'(j);
      #0.1;
      checks++;
      if (lk_hit != on[j] || (on[j] && int'(lk_slot) != slot_of[j])) begin
        failures++;
        if (failures < 6) $display("FAIL lookup tok %0d hit %0d exp %0d slot %0d exp %0d", j, lk_hit, on[j], lk_slot, slot_of[j]);
      end
      if (on[j]) begin
        checks++;
        if (used[slot_of[j]]) failures++;
        used[slot_of[j]] = 1;
      end
    end
  endtask

  task automatic round(input bit fl);
    int n_on, sc;
    for (int w = 0; w < S / 32; w++) p_cur[w*32 +: 32] = $urandom | $urandom;   // ~75% pruned
    @(negedge clk) q_start = 1; flush = fl;
    @(negedge clk) q_start = 0; flush = 0;
    sc = 1;
    while (!evict_done) begin sc++; @(negedge clk); end
    checks += 2;
    if (sc != CAP + 1) begin   // the q_start cycle plus one cycle per slot
      failures++; $display("FAIL scan took %0d cycles", sc); end
    if (unpruned != ~p_cur) failures++;
    n_on = 0;
    for (int j = 0; j < S; j++) begin
      if (fl || p_cur[j]) on[j] = 0;
      if (on[j]) n_on++;
    end
    check_lookup();
    @(negedge clk);
    for (int j = 0; j < S && n_on < CAP; j++) if (!p_cur[j] && !on[j]) begin
      if ($urandom % 4 == 0) @(negedge clk);
      checks++;
      if (!alloc_ok) begin
        failures++;
        $display("FAIL no free slot with %0d on chip", n_on);
        break;
      end
      alloc_req = 1; alloc_tok = 8'(j);
      on[j] = 1; slot_of[j] = int'(alloc_slot);
      n_on++;
      @(negedge clk) alloc_req = 0;
    end
    check_lookup();
  endtask

  initial begin
    for (int j = 0; j < S; j++) begin on[j] = 0; slot_of[j] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    round(1);
    for (int r = 0; r < 40; r++) round(r % 13 == 12);
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

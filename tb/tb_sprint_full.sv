// tb_sprint_full: one complete attention head on the system with every
// parameter at its default (4096-token sequence space, 16 channels, 128-entry
// buffers). The head is BERT-sized: 384 valid tokens, threshold 120, which
// leaves roughly a quarter of the keys unpruned. All 384 attention vectors
// and the fetch/reuse/overflow/query counters are checked against a
// reference computed in the testbench, and pruning, key reuse, fetching,
// buffer-write stalls and the padding cut-off must each occur.
module tb_sprint_full;
  import sprint_pkg::*;

  localparam int unsigned S  = SEQ_MAX;
  localparam int unsigned TW = $clog2(S);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  logic                 ld_valid = 1'b0;
  logic [TW-1:0]        ld_tok = '0;
  logic [VEC_W-1:0]     ld_q = '0, ld_k = '0, ld_v = '0;
  logic                 th_we = 1'b0;
  logic signed [15:0]   th = '0;
  logic                 start = 1'b0;
  logic [TW:0]          valid_len = '0;
  logic                 busy, out_valid;
  logic [TW-1:0]        out_idx;
  logic [D*OUT_W-1:0]   out_vec;
  logic                 out_ready = 1'b1;
  logic [31:0]          cnt_fetch, cnt_reuse, cnt_ovf, cnt_query, cnt_stall;

  sprint_top dut (.*);

  int checks = 0, failures = 0;
  logic [VEC_W-1:0] qm [S];
  logic [VEC_W-1:0] km [S];
  logic [VEC_W-1:0] vm [S];
  int exp_hi [64];
  int exp_lo [64];

  // expected counters
  int e_fetch, e_reuse, e_ovf;
  bit prev_keep [S];
  // mechanism counters
  int n_pruned, n_reuse, n_fetch, n_stall, n_ovf, n_padq, n_allpruned;

  function automatic int sel8(logic [VEC_W-1:0] x, int i);
    return int'($signed(x[i*8 +: 8]));
  endfunction

  // reference attention of query qi over tokens < L; also updates counters
  task automatic ref_query(input int qi, input int L, input int t, output logic [D*OUT_W-1:0] res,
                           output int nkeep);
    bit keep [S];
    int kept, e [S], sum, acc [D];
    kept = 0; sum = 0;
    for (int i = 0; i < D; i++) acc[i] = 0;
    for (int j = 0; j < S; j++) keep[j] = 0;
    for (int j = 0; j < L; j++) begin
      int ms = 0;
      for (int i = 0; i < D; i++) ms += (sel8(qm[qi], i) >>> 4) * (sel8(km[j], i) >>> 4);
      if (ms >= t) begin
        if (kept < KV_ENTRIES) begin keep[j] = 1; kept++; end
        else e_ovf++;
      end else n_pruned++;
    end
    for (int j = 0; j < L; j++) if (keep[j]) begin
      int sc = 0, u;
      for (int i = 0; i < D; i++) sc += sel8(qm[qi], i) * sel8(km[j], i);
      sc = sc >>> 3;
      if (sc > 2047) sc = 2047;
      if (sc < -2048) sc = -2048;
      u = 2047 - sc;
      e[j] = exp_hi[u / 64] * exp_lo[u % 64];
      sum += e[j];
      if (prev_keep[j]) e_reuse++; else e_fetch++;
    end
    for (int j = 0; j < L; j++) if (keep[j]) begin
      int p;
      p = (sum == 0) ? 0 : (e[j] * 256) / sum;
      if (p > 255) p = 255;
      for (int i = 0; i < D; i++) acc[i] += p * sel8(vm[j], i);
    end
    for (int i = 0; i < D; i++) begin
      int a = acc[i];
      if (a > 32767) a = 32767;
      if (a < -32768) a = -32768;
      res[i*OUT_W +: OUT_W] = 16'(a);
    end
    for (int j = 0; j < S; j++) prev_keep[j] = keep[j];
    nkeep = kept;
  endtask

  task automatic gen_data();
    for (int j = 0; j < S; j++) begin
      for (int w = 0; w < VEC_W / 32; w++) begin
        km[j][w*32 +: 32] = $urandom;
        vm[j][w*32 +: 32] = $urandom;
      end
      if (j == 0) for (int w = 0; w < VEC_W / 32; w++) qm[j][w*32 +: 32] = $urandom;
      else begin
        qm[j] = qm[j-1];
        for (int c = 0; c < 4; c++) qm[j][($urandom % D) * 8 +: 8] = 8'($urandom);
      end
    end
  endtask

  task automatic load_all();
    for (int j = 0; j < S; j++) begin
      @(negedge clk);
      ld_valid = 1'b1; ld_tok = TW'(j); ld_q = qm[j]; ld_k = km[j]; ld_v = vm[j];
    end
    @(negedge clk) ld_valid = 1'b0;
  endtask

  task automatic run(input int t, input int L);
    logic [D*OUT_W-1:0] r;
    int nk, got, f0, u0, o0, q0;
    f0 = int'(cnt_fetch); u0 = int'(cnt_reuse); o0 = int'(cnt_ovf); q0 = int'(cnt_query);
    e_fetch = 0; e_reuse = 0; e_ovf = 0;
    for (int j = 0; j < S; j++) prev_keep[j] = 0;
    @(negedge clk); th_we = 1'b1; th = 16'(t);
    @(negedge clk); th_we = 1'b0; valid_len = (TW+1)'(L); start = 1'b1;
    @(negedge clk); start = 1'b0;
    got = 0;
    while (got < L) begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        ref_query(got, L, t, r, nk);
        checks++;
        if (out_idx != TW'(got) || out_vec != r) begin
          failures++;
          if (failures < 5) $display("FAIL query %0d (idx %0d, kept %0d): got %h exp %h",
                                     got, out_idx, nk, out_vec[63:0], r[63:0]);
        end
        if (nk == 0) n_allpruned++;
        got++;
      end
    end
    wait (!busy);
    @(negedge clk);
    checks += 4;
    if (int'(cnt_fetch) - f0 != e_fetch) begin failures++; $display("FAIL fetch %0d exp %0d", int'(cnt_fetch) - f0, e_fetch); end
    if (int'(cnt_reuse) - u0 != e_reuse) begin failures++; $display("FAIL reuse %0d exp %0d", int'(cnt_reuse) - u0, e_reuse); end
    if (int'(cnt_ovf) - o0 != e_ovf)     begin failures++; $display("FAIL ovf %0d exp %0d", int'(cnt_ovf) - o0, e_ovf); end
    if (int'(cnt_query) - q0 != L)       begin failures++; $display("FAIL queries %0d exp %0d", int'(cnt_query) - q0, L); end
    n_fetch += e_fetch; n_reuse += e_reuse; n_ovf += e_ovf;
    if (L < S) n_padq++;
  endtask

  initial begin
    for (int h = 0; h < 64; h++) begin
      exp_hi[h] = int'($floor(255.0 * $exp(-h / 4.0) + 0.5));
      exp_lo[h] = int'($floor(255.0 * $exp(-h / 256.0) + 0.5));
    end
    n_pruned = 0; n_reuse = 0; n_fetch = 0; n_stall = 0; n_ovf = 0; n_padq = 0; n_allpruned = 0;
    void'($urandom(7));
    gen_data();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_all();
    run(120, 384);
    n_stall = int'(cnt_stall);
    $display("mechanisms: pruned=%0d reused=%0d fetched=%0d stalls=%0d overflow=%0d padded_runs=%0d all_pruned=%0d",
             n_pruned, n_reuse, n_fetch, n_stall, n_ovf, n_padq, n_allpruned);
    checks += 5;
    if (n_pruned == 0)    failures++;
    if (n_reuse == 0)     failures++;
    if (n_fetch == 0)     failures++;
    if (n_stall == 0)     failures++;
    if (n_padq == 0)      failures++;
    $display("cycles: %0t", $time / 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// index_buffer: the CORELET's unpruned-index buffer with its on-chip lookup
// table and address generator.
//
// It keeps three things:
//   * the unpruned-index vector of the current query (one bit per token,
//     4096 bits = 0.5 KB), loaded with q_start;
//   * per token an "on-chip?" bit and the K/V buffer address (slot) that holds
//     its key and value;
//   * per slot the owning token, used to free slots.
// When a new pruning vector arrives, the slots are walked one per cycle and
// every slot whose token is pruned for the new query is freed (evict_done
// rises after CAP cycles). What stays on chip is then exactly the keys
// unpruned in both queries, which is what the memory controller's locality
// vector assumes. Fetched keys get a slot through alloc_req/alloc_tok
// (allowed when alloc_ok): never-used slots first, then freed slots from a
// FIFO. lk_tok -> lk_hit/lk_slot is the combinational address generator
// used for keys that are already on chip. The eviction and allocation order
// are this design's choices. A q_start with flush=1 (first query of a run)
// frees every slot, since nothing fetched earlier may be assumed on chip.
module index_buffer #(
  parameter int unsigned S   = 4096,
  parameter int unsigned CAP = 128
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     q_start,
  input  logic                     flush,       // with q_start: free every slot
  input  logic [S-1:0]             p_cur,       // 1 = pruned
  output logic                     evict_done,
  output logic [S-1:0]             unpruned,
  input  logic                     alloc_req,
  input  logic [$clog2(S)-1:0]     alloc_tok,
  output logic                     alloc_ok,
  output logic [$clog2(CAP)-1:0]   alloc_slot,
  input  logic [$clog2(S)-1:0]     lk_tok,
  output logic                     lk_hit,
  output logic [$clog2(CAP)-1:0]   lk_slot
);
  localparam int unsigned TW = $clog2(S);
  localparam int unsigned SW = $clog2(CAP);

  logic [S-1:0]   tok_on;
  logic [SW-1:0]  tok_slot [S];
  logic [CAP-1:0] slot_valid;
  logic [TW-1:0]  slot_tok [CAP];
  logic [SW:0]    never_used;     // slots [never_used, CAP) were never allocated
  logic [SW:0]    scan;
  logic           scanning;
  logic           flush_r;

  logic           fr_push, fr_pop, fr_empty, fr_full;
  logic [SW-1:0]  fr_dout;
  logic           evict_now;

  assign evict_done = !scanning;
  assign lk_hit     = tok_on[lk_tok];
  assign lk_slot    = tok_slot[lk_tok];
  assign alloc_ok   = !scanning && ((never_used < (SW+1)'(CAP)) || !fr_empty);
  assign alloc_slot = (never_used < (SW+1)'(CAP)) ? never_used[SW-1:0] : fr_dout;

  assign evict_now = scanning && slot_valid[scan[SW-1:0]] &&
                     (flush_r || !unpruned[slot_tok[scan[SW-1:0]]]);
  assign fr_push   = evict_now;
  assign fr_pop    = alloc_req && alloc_ok && !(never_used < (SW+1)'(CAP));

  sync_fifo #(.W(SW), .DEPTH(CAP)) u_free (
    .clk, .rst_n, .clr(1'b0),
    .push(fr_push), .din(scan[SW-1:0]),
    .pop(fr_pop), .dout(fr_dout), .empty(fr_empty), .full(fr_full)
  );

  always_ff @(posedge clk) begin
    if (alloc_req && alloc_ok) begin
      tok_slot[alloc_tok]  <= alloc_slot;
      slot_tok[alloc_slot] <= alloc_tok;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tok_on     <= '0;
      slot_valid <= '0;
      never_used <= '0;
      scan       <= '0;
      scanning   <= 1'b0;
      flush_r    <= 1'b0;
      unpruned   <= '0;
    end else begin
      if (q_start) begin
        unpruned <= ~p_cur;
        flush_r  <= flush;
        scan     <= '0;
        scanning <= 1'b1;
      end else if (scanning) begin
        if (evict_now) begin
          slot_valid[scan[SW-1:0]]     <= 1'b0;
          tok_on[slot_tok[scan[SW-1:0]]] <= 1'b0;
        end
        if (scan == (SW+1)'(CAP - 1)) scanning <= 1'b0;
        scan <= scan + 1'b1;
      end
      if (alloc_req && alloc_ok) begin
        slot_valid[alloc_slot] <= 1'b1;
        tok_on[alloc_tok]      <= 1'b1;
        if (never_used < (SW+1)'(CAP)) never_used <= never_used + 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) alloc_req |-> alloc_ok)
    else $error("index_buffer: allocation without a free slot");
endmodule

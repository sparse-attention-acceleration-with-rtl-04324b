// corelet: one CORELET, the unit that recomputes the scores of the unpruned
// keys exactly and produces the attention vector of one query.
//
// Contents: Q-buf and QK-PU, softmax, V-PU, the K-buf (MSB and LSB halves,
// 2 banks each) and V-buf (4 banks) of 128 entries, the index buffer with its
// on-chip lookup table, a two-entry temporary buffer for vectors arriving
// from memory and a two-entry output FIFO.
//
// A query starts with q_valid (q_first marks the first of a run; query, pruning vector, number of unpruned
// keys n_unp). Keys then reach the QK-PU from two sources:
//   * loc_*  : indices of keys already on chip (from the key index
//              generators); the lookup table gives their buffer address;
//   * fill_* : keys and values fetched from memory. They wait in the
//              temporary buffer; writing one into K-buf/V-buf takes the
//              single-ported buffers for a cycle, so score computation
//              stalls that cycle (counted in cnt_stall). The written slot is
//              queued and its score computed in a later cycle.
// Keys are processed in whatever order they become available, so an
// absent key never blocks one that is present. After n_unp scores the
// softmax normalises; each probability reads its value vector from the
// V-buf (one cycle) and the V-PU accumulates. The finished 64 x 16-bit
// attention vector goes to the output FIFO and corelet_done pulses.
// Ordering of the sources and the buffer depths are this design's choices.
module corelet
  import sprint_pkg::*;
#(
  parameter int unsigned S   = SEQ_MAX,
  parameter int unsigned CAP = KV_ENTRIES
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     q_valid,
  input  logic                     q_first,
  input  logic [VEC_W-1:0]         q_data,
  input  logic [$clog2(S)-1:0]     q_idx,
  input  logic [S-1:0]             p_vec,
  input  logic [$clog2(CAP):0]     n_unp,
  input  logic                     loc_valid,
  input  logic [$clog2(S)-1:0]     loc_tok,
  output logic                     loc_ready,
  input  logic                     fill_valid,
  input  fill_t                    fill,
  output logic                     fill_ready,
  output logic                     corelet_done,
  output logic                     out_valid,
  output logic [$clog2(S)-1:0]     out_idx,
  output logic [D*OUT_W-1:0]       out_vec,
  input  logic                     out_ready,
  output logic [31:0]              cnt_stall
);
  localparam int unsigned SW = $clog2(CAP);
  localparam int unsigned TW = $clog2(S);

  typedef enum logic [1:0] {C_IDLE, C_RUN, C_OUT} cstate_e;
  cstate_e cst;
  logic [TW-1:0] qidx_r;

  // temporary buffer for arriving vectors
  logic  tb_empty, tb_full, tb_pop;
  fill_t tb_dout;
  sync_fifo #(.W($bits(fill_t)), .DEPTH(2)) u_tmp (
    .clk, .rst_n, .clr(1'b0), .push(fill_valid && fill_ready), .din(fill),
    .pop(tb_pop), .dout(tb_dout), .empty(tb_empty), .full(tb_full));
  assign fill_ready = !tb_full;

  // index buffer
  logic           ib_evict_done, ib_alloc_ok, ib_lk_hit;
  logic [SW-1:0]  ib_alloc_slot, ib_lk_slot;
  logic [S-1:0]   ib_unpruned;
  index_buffer #(.S(S), .CAP(CAP)) u_ib (
    .clk, .rst_n, .q_start(q_valid), .flush(q_first), .p_cur(p_vec),
    .evict_done(ib_evict_done), .unpruned(ib_unpruned),
    .alloc_req(tb_pop), .alloc_tok(tb_dout.tok),
    .alloc_ok(ib_alloc_ok), .alloc_slot(ib_alloc_slot),
    .lk_tok(loc_tok), .lk_hit(ib_lk_hit), .lk_slot(ib_lk_slot));

  // queue of freshly written slots waiting for their score
  logic          rq_empty, rq_full, rq_pop;
  logic [SW-1:0] rq_dout;
  sync_fifo #(.W(SW), .DEPTH(4)) u_rdyq (
    .clk, .rst_n, .clr(1'b0), .push(tb_pop), .din(ib_alloc_slot),
    .pop(rq_pop), .dout(rq_dout), .empty(rq_empty), .full(rq_full));

  // port arbitration for K-buf: write > queued slot > on-chip key
  logic          do_write, do_rq, do_loc;
  logic [SW-1:0] k_addr;
  assign do_write  = (cst == C_RUN) && !tb_empty && ib_alloc_ok && !rq_full;
  assign tb_pop    = do_write;
  assign do_rq     = (cst == C_RUN) && !do_write && !rq_empty;
  assign rq_pop    = do_rq;
  assign do_loc    = (cst == C_RUN) && !do_write && !do_rq && loc_valid;
  assign loc_ready = do_loc;
  assign k_addr    = do_write ? ib_alloc_slot : (do_rq ? rq_dout : ib_lk_slot);

  logic [NIB_W-1:0] kmsb_rd, klsb_rd;
  logic [VEC_W-1:0] v_rd;
  kv_buffer #(.NBANK(2), .BANK_W(128), .DEPTH(CAP)) u_kbuf_msb (
    .clk, .we(do_write), .addr(k_addr), .wdata(tb_dout.k_msb), .rdata(kmsb_rd));
  kv_buffer #(.NBANK(2), .BANK_W(128), .DEPTH(CAP)) u_kbuf_lsb (
    .clk, .we(do_write), .addr(k_addr), .wdata(tb_dout.k_lsb), .rdata(klsb_rd));

  // score path
  logic          rd_v;
  logic [SW-1:0] rd_slot;
  logic          s_valid;
  logic signed [SCORE_W-1:0] score;
  logic [SW-1:0] s_tag;
  qk_pu #(.TAG_W(SW)) u_qk (
    .clk, .rst_n, .q_load(q_valid), .q_in(q_data),
    .k_valid(rd_v), .k_msb(kmsb_rd), .k_lsb(klsb_rd), .k_tag(rd_slot),
    .s_valid, .score, .s_tag);

  logic              p_valid, sm_done;
  logic [PROB_W-1:0] prob;
  logic [SW-1:0]     p_tag;
  softmax #(.TAG_W(SW), .FIFO_DEPTH(CAP), .CNT_W(SW+1)) u_sm (
    .clk, .rst_n, .clr(q_valid), .n_total(n_unp),
    .s_valid, .score, .s_tag, .p_valid, .prob, .p_tag, .done(sm_done));

  // value path: V-buf read, then V-PU
  logic              pv_d;
  logic [PROB_W-1:0] prob_d;
  kv_buffer #(.NBANK(4), .BANK_W(128), .DEPTH(CAP)) u_vbuf (
    .clk, .we(do_write), .addr(do_write ? ib_alloc_slot : p_tag), .wdata(tb_dout.v), .rdata(v_rd));
  logic [D*OUT_W-1:0] att;
  v_pu u_vpu (.clk, .rst_n, .clr(q_valid), .p_valid(pv_d), .prob(prob_d), .v(v_rd), .out_vec(att));

  // output FIFO
  logic of_empty, of_full, of_push;
  logic [TW+D*OUT_W-1:0] of_dout;
  sync_fifo #(.W(TW+D*OUT_W), .DEPTH(2)) u_out (
    .clk, .rst_n, .clr(1'b0), .push(of_push), .din({qidx_r, att}),
    .pop(out_valid && out_ready), .dout(of_dout), .empty(of_empty), .full(of_full));
  assign out_valid = !of_empty;
  assign {out_idx, out_vec} = of_dout;

  assign of_push      = (cst == C_OUT) && !of_full;
  assign corelet_done = of_push;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst       <= C_IDLE;
      qidx_r    <= '0;
      rd_v      <= 1'b0;
      rd_slot   <= '0;
      pv_d      <= 1'b0;
      prob_d    <= '0;
      cnt_stall <= '0;
    end else begin
      rd_v    <= do_rq || do_loc;
      rd_slot <= k_addr;
      pv_d    <= p_valid;
      prob_d  <= prob;
      if (do_write && (!rq_empty || loc_valid)) cnt_stall <= cnt_stall + 1;
      case (cst)
        C_IDLE: if (q_valid) begin
          cst    <= C_RUN;
          qidx_r <= q_idx;
        end
        C_RUN: if (sm_done && !pv_d && !p_valid) cst <= C_OUT;
        C_OUT: if (!of_full) cst <= C_IDLE;
        default: cst <= C_IDLE;
      endcase
    end
  end

  // a key announced as on chip must be in the lookup table
  assert property (@(posedge clk) disable iff (!rst_n) do_loc |-> ib_lk_hit)
    else $error("corelet: on-chip key %0d not found in the lookup table", loc_tok);
endmodule

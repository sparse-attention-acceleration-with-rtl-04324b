// mem_ctrl: memory controller that runs in-memory pruning and fetches only
// the keys/values the CORELET does not already hold.
//
// Per query q_i (i < valid_len; queries in the padded region are skipped):
//   1. Q read   : q_i is read from the standard ReRAM channel i mod NCH.
//   2. CopyQ    : its 4-bit MSBs go to the transposable arrays in four
//                 64-bit CopyQ commands, the last one with the start bit.
//   3. tAxTh    : no command for T_AXTH cycles while the arrays threshold.
//   4. ReadP    : the binary pruning vector ('1' = pruned) is read 64 bits
//                 per command, only for the chunks below valid_len. Each
//                 chunk is filtered: tokens >= valid_len (padding) are
//                 forced to pruned, and once CAP keys are unpruned the rest
//                 are pruned too and counted as overflow (the K/V buffers
//                 hold CAP vectors).
//   5. SLD      : req = P(t-1) & ~P(t), loc = ~P(t-1) & ~P(t).
//   6. The CORELET gets q_i, P(t) and the unpruned count (q_valid). Then,
//      per channel, an MRG engine walks req and a KIG engine walks loc
//      (keys ch, ch+NCH, ...). Each requested key is fetched by that
//      channel's back end: K_LSB and V from standard ReRAM, K_MSB by a
//      transposed read of the transposable array (one TRead per cycle,
//      round-robin over channels). Complete key/value pairs go to the
//      CORELET on fill_*, KIG indices on loc_*, both round-robin.
//   7. When all engines and back ends are idle and the CORELET reports the
//      query done, P(t) becomes P(t-1) and the next query starts.
// P(t-1) starts as all ones, so the first query fetches all its keys.
// Queries are not overlapped, CopyQ/ReadP are issued one per cycle, and the
// overflow rule, arbitration and channel of q_i are this design's choices.
module mem_ctrl
  import sprint_pkg::*;
#(
  parameter int unsigned S     = SEQ_MAX,
  parameter int unsigned NCHN  = NCH,
  parameter int unsigned CAP   = KV_ENTRIES,
  parameter int unsigned TAXTH = T_AXTH
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // run control
  input  logic                         start,
  input  logic [$clog2(S):0]           valid_len,
  output logic                         busy,
  // transposable ReRAM command port
  output logic                         ta_cmd_valid,
  output mem_cmd_e                     ta_cmd,
  output logic [$clog2(S)-1:0]         ta_addr,
  output logic                         ta_start,
  output logic [CH_W-1:0]              ta_wdata,
  input  logic                         ta_rd_valid,
  input  logic [NIB_W-1:0]             ta_rd_data,
  // standard ReRAM channels
  output logic [NCHN-1:0]              ch_req_valid,
  input  logic [NCHN-1:0]              ch_req_ready,
  output logic [NCHN-1:0]              ch_req_kv,
  output logic [$clog2(S/NCHN)-1:0]    ch_req_row [NCHN],
  input  logic [NCHN-1:0]              ch_resp_valid,
  input  logic [VEC_W-1:0]             ch_resp_q    [NCHN],
  input  logic [NIB_W-1:0]             ch_resp_klsb [NCHN],
  input  logic [VEC_W-1:0]             ch_resp_v    [NCHN],
  // to the CORELET
  output logic                         q_valid,
  output logic                         q_first,
  output logic [VEC_W-1:0]             q_data,
  output logic [$clog2(S)-1:0]         q_idx,
  output logic [S-1:0]                 p_vec,
  output logic [$clog2(CAP):0]         n_unp,
  output logic                         loc_valid,
  output logic [$clog2(S)-1:0]         loc_tok,
  input  logic                         loc_ready,
  output logic                         fill_valid,
  output fill_t                        fill,
  input  logic                         fill_ready,
  input  logic                         corelet_done,
  // event counters
  output logic [31:0]                  cnt_fetch,
  output logic [31:0]                  cnt_reuse,
  output logic [31:0]                  cnt_ovf,
  output logic [31:0]                  cnt_query
);
  localparam int unsigned TW     = $clog2(S);
  localparam int unsigned CHB    = $clog2(NCHN);
  localparam int unsigned RW     = $clog2(S / NCHN);
  localparam int unsigned NCHUNK = S / CH_W;
  localparam int unsigned CKW    = $clog2(NCHUNK) + 1;
  localparam int unsigned QCH    = NIB_W / CH_W;       // CopyQ commands per query
  localparam int unsigned KW     = $clog2(CAP) + 1;

  typedef enum logic [3:0] {
    M_IDLE, M_QREQ, M_QWAIT, M_COPYQ, M_AXTH, M_READP, M_SLD, M_SCAN, M_WAITC
  } mstate_e;
  mstate_e st;

  logic [TW:0]     qi;
  logic [VEC_W-1:0] qreg;
  logic [1:0]      cq;
  logic [3:0]      wcnt;
  logic [CKW-1:0]  ck_iss, ck_rcv, ck_need;
  logic [KW-1:0]   kept;
  logic [S-1:0]    p_prev, p_cur, req_r, loc_r, req_w, loc_w;
  logic            cdone;
  logic            eng_start;

  assign busy   = (st != M_IDLE);
  assign q_data = qreg;
  assign p_vec  = p_cur;
  assign n_unp  = kept;
  assign ck_need = CKW'((valid_len + ($clog2(S)+1)'(CH_W - 1)) / ($clog2(S)+1)'(CH_W));

  sld #(.S(S)) u_sld (.p_prev(p_prev), .p_cur(p_cur), .req_vec(req_w), .loc_vec(loc_w));

  // ---------------- ReadP chunk filter (padding mask and capacity) ----------
  logic [CH_W-1:0] chunk_f;
  logic [KW-1:0]   kept_n;
  logic [6:0]      ovf_n;
  always_comb begin
    logic [TW:0] tok;
    logic        live;
    kept_n = kept;
    ovf_n  = '0;
    for (int b = 0; b < CH_W; b++) begin
      tok  = (TW+1)'(ck_rcv) * (TW+1)'(CH_W) + (TW+1)'(b);
      live = !ta_rd_data[b] && (tok < valid_len);
      if (live && kept_n < KW'(CAP)) begin
        chunk_f[b] = 1'b0;
        kept_n     = kept_n + 1'b1;
      end else begin
        chunk_f[b] = 1'b1;
        if (live) ovf_n = ovf_n + 1'b1;
      end
    end
  end

  // ---------------- engines ----------------
  logic [NCHN-1:0] m_v, m_rdy, m_done, k_v, k_rdy, k_done;
  logic [TW-1:0]   m_idx [NCHN];
  logic [TW-1:0]   k_idx [NCHN];

  // back end per channel
  typedef enum logic [1:0] {B_IDLE, B_WAIT, B_FILL} bstate_e;
  bstate_e         bst [NCHN];
  logic [TW-1:0]   b_tok  [NCHN];
  logic [NCHN-1:0] b_std_got, b_ta_got, b_ta_req, b_ta_iss, b_std_iss;
  logic [NIB_W-1:0] b_kmsb [NCHN];
  logic [NIB_W-1:0] b_klsb [NCHN];
  logic [VEC_W-1:0] b_v    [NCHN];

  for (genvar c = 0; c < NCHN; c++) begin : g_ch
    mrg #(.S(S), .NCH(NCHN)) u_mrg (
      .clk, .rst_n, .start(eng_start), .vec(req_r), .base(CHB'(c)),
      .idx_valid(m_v[c]), .idx(m_idx[c]), .idx_ready(m_rdy[c]), .done(m_done[c]));
    mrg #(.S(S), .NCH(NCHN)) u_kig (
      .clk, .rst_n, .start(eng_start), .vec(loc_r), .base(CHB'(c)),
      .idx_valid(k_v[c]), .idx(k_idx[c]), .idx_ready(k_rdy[c]), .done(k_done[c]));
    assign m_rdy[c] = (bst[c] == B_IDLE) && (st == M_SCAN);
  end

  // round-robin pick helper
  function automatic logic [CHB:0] rr_pick(input logic [NCHN-1:0] req, input logic [CHB-1:0] ptr);
    for (int i = 0; i < NCHN; i++) begin
      logic [CHB-1:0] c;
      c = ptr + CHB'(i);
      if (req[c]) return {1'b1, c};
    end
    return '0;
  endfunction

  // KIG -> loc port
  logic [CHB-1:0] kp, tp, fp;
  logic [CHB:0]   kpick, tpick, fpick;
  assign kpick     = rr_pick(k_v, kp);
  assign loc_valid = kpick[CHB];
  assign loc_tok   = k_idx[kpick[CHB-1:0]];
  always_comb begin
    k_rdy = '0;
    if (kpick[CHB] && loc_ready) k_rdy[kpick[CHB-1:0]] = 1'b1;
  end

  // transposed-read arbitration
  logic [NCHN-1:0] ta_pend;
  assign ta_pend = b_ta_req & ~b_ta_iss;
  assign tpick   = rr_pick(ta_pend, tp);
  logic           tr_issue;
  assign tr_issue = (st == M_SCAN) && tpick[CHB];

  // in-order return of transposed reads: channel ids in issue order
  logic          rq_empty, rq_full;
  logic [CHB-1:0] rq_ch;
  sync_fifo #(.W(CHB), .DEPTH(NCHN)) u_trq (
    .clk, .rst_n, .clr(1'b0),
    .push(tr_issue), .din(tpick[CHB-1:0]),
    .pop(ta_rd_valid && st == M_SCAN), .dout(rq_ch), .empty(rq_empty), .full(rq_full));

  // fill arbitration
  logic [NCHN-1:0] f_req;
  always_comb for (int c = 0; c < NCHN; c++) f_req[c] = (bst[c] == B_FILL);
  assign fpick      = rr_pick(f_req, fp);
  assign fill_valid = fpick[CHB];
  assign fill.tok   = b_tok [fpick[CHB-1:0]];
  assign fill.k_msb = b_kmsb[fpick[CHB-1:0]];
  assign fill.k_lsb = b_klsb[fpick[CHB-1:0]];
  assign fill.v     = b_v   [fpick[CHB-1:0]];

  // transposable ReRAM command mux
  always_comb begin
    ta_cmd_valid = 1'b0;
    ta_cmd       = CMD_NOP;
    ta_addr      = '0;
    ta_start     = 1'b0;
    ta_wdata     = '0;
    case (st)
      M_COPYQ: begin
        ta_cmd_valid = 1'b1;
        ta_cmd       = CMD_COPYQ;
        ta_addr      = TW'(cq);
        ta_start     = (cq == 2'(QCH - 1));
        for (int i = 0; i < CH_W / NW; i++)   // MSB nibble of each element
          ta_wdata[i*NW +: NW] = qreg[(cq*(CH_W/NW) + i)*EW + (EW-NW) +: NW];
      end
      M_READP: if (ck_iss < ck_need) begin
        ta_cmd_valid = 1'b1;
        ta_cmd       = CMD_READP;
        ta_addr      = TW'(ck_iss);
      end
      M_SCAN: if (tr_issue) begin
        ta_cmd_valid = 1'b1;
        ta_cmd       = CMD_TREAD;
        ta_addr      = b_tok[tpick[CHB-1:0]];
      end
      default: ;
    endcase
  end

  // standard ReRAM request mux
  logic [CHB-1:0] qch;
  assign qch = qi[CHB-1:0];
  always_comb begin
    for (int c = 0; c < NCHN; c++) begin
      ch_req_valid[c] = (bst[c] == B_WAIT) && !b_std_iss[c];
      ch_req_kv[c]    = 1'b1;
      ch_req_row[c]   = b_tok[c][TW-1:CHB];
    end
    if (st == M_QREQ && qi < valid_len) begin
      ch_req_valid[qch] = 1'b1;
      ch_req_kv[qch]    = 1'b0;
      ch_req_row[qch]   = qi[TW-1:CHB];
    end
  end

  logic all_idle;
  always_comb begin
    all_idle = 1'b1;
    for (int c = 0; c < NCHN; c++) if (bst[c] != B_IDLE) all_idle = 1'b0;
  end

  assign eng_start = (st == M_SLD);
  assign q_valid   = (st == M_SLD);
  assign q_idx     = qi[TW-1:0];
  assign q_first   = (qi == 0);

  // ---------------- back ends ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCHN; c++) begin
        bst[c]    <= B_IDLE;
        b_tok[c]  <= '0;
        b_kmsb[c] <= '0;
        b_klsb[c] <= '0;
        b_v[c]    <= '0;
      end
      b_std_got <= '0; b_ta_got <= '0; b_ta_req <= '0; b_ta_iss <= '0; b_std_iss <= '0;
      tp <= '0; fp <= '0; kp <= '0;
    end else begin
      if (tr_issue) begin
        b_ta_iss[tpick[CHB-1:0]] <= 1'b1;
        tp <= tpick[CHB-1:0] + 1'b1;
      end
      if (ta_rd_valid && st == M_SCAN) begin
        b_kmsb[rq_ch]   <= ta_rd_data;
        b_ta_got[rq_ch] <= 1'b1;
      end
      if (loc_valid && loc_ready) kp <= kpick[CHB-1:0] + 1'b1;
      for (int c = 0; c < NCHN; c++) begin
        case (bst[c])
          B_IDLE: if (m_v[c] && m_rdy[c]) begin
            bst[c]       <= B_WAIT;
            b_tok[c]     <= m_idx[c];
            b_ta_req[c]  <= 1'b1;
            b_ta_iss[c]  <= 1'b0;
            b_ta_got[c]  <= 1'b0;
            b_std_iss[c] <= 1'b0;
            b_std_got[c] <= 1'b0;
          end
          B_WAIT: begin
            if (ch_req_valid[c] && ch_req_ready[c]) b_std_iss[c] <= 1'b1;
            if (ch_resp_valid[c] && b_std_iss[c]) begin
              b_klsb[c]    <= ch_resp_klsb[c];
              b_v[c]       <= ch_resp_v[c];
              b_std_got[c] <= 1'b1;
            end
            if (b_std_got[c] && b_ta_got[c]) begin
              bst[c]      <= B_FILL;
              b_ta_req[c] <= 1'b0;
            end
          end
          B_FILL: if (fill_valid && fill_ready && fpick[CHB-1:0] == CHB'(c)) begin
            bst[c] <= B_IDLE;
            fp     <= CHB'(c) + 1'b1;
          end
          default: bst[c] <= B_IDLE;
        endcase
      end
    end
  end

  // ---------------- query sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= M_IDLE;
      qi        <= '0;
      qreg      <= '0;
      cq        <= '0;
      wcnt      <= '0;
      ck_iss    <= '0;
      ck_rcv    <= '0;
      kept      <= '0;
      p_prev    <= '1;
      p_cur     <= '1;
      req_r     <= '0;
      loc_r     <= '0;
      cdone     <= 1'b0;
      cnt_fetch <= '0;
      cnt_reuse <= '0;
      cnt_ovf   <= '0;
      cnt_query <= '0;
    end else begin
      if (fill_valid && fill_ready) cnt_fetch <= cnt_fetch + 1;
      if (loc_valid && loc_ready)   cnt_reuse <= cnt_reuse + 1;
      if (corelet_done)             cdone     <= 1'b1;
      case (st)
        M_IDLE: if (start) begin
          qi     <= '0;
          p_prev <= '1;
          st     <= M_QREQ;
        end
        M_QREQ: begin
          if (qi >= valid_len) st <= M_IDLE;           // vertical padding cut
          else if (ch_req_ready[qch]) st <= M_QWAIT;
        end
        M_QWAIT: if (ch_resp_valid[qch]) begin
          qreg <= ch_resp_q[qch];
          cq   <= '0;
          st   <= M_COPYQ;
        end
        M_COPYQ: begin
          cq <= cq + 1'b1;
          if (cq == 2'(QCH - 1)) begin
            wcnt <= 4'(TAXTH - 1);
            st   <= M_AXTH;
          end
        end
        M_AXTH: begin
          if (wcnt == 0) begin
            ck_iss <= '0;
            ck_rcv <= '0;
            kept   <= '0;
            p_cur  <= '1;
            st     <= M_READP;
          end else wcnt <= wcnt - 1'b1;
        end
        M_READP: begin
          if (ck_iss < ck_need) ck_iss <= ck_iss + 1'b1;
          if (ta_rd_valid) begin
            p_cur[ck_rcv*CH_W +: CH_W] <= chunk_f;
            kept    <= kept_n;
            cnt_ovf <= cnt_ovf + 32'(ovf_n);
            ck_rcv  <= ck_rcv + 1'b1;
            if (ck_rcv + 1'b1 == ck_need) st <= M_SLD;
          end
          if (ck_need == 0) st <= M_SLD;
        end
        M_SLD: begin
          req_r <= req_w;
          loc_r <= loc_w;
          cdone <= 1'b0;
          st    <= M_SCAN;
        end
        M_SCAN: if (&m_done && &k_done && all_idle && !eng_start) st <= M_WAITC;
        M_WAITC: if (cdone || corelet_done) begin
          p_prev    <= p_cur;
          qi        <= qi + 1'b1;
          cnt_query <= cnt_query + 1;
          st        <= M_QREQ;
        end
        default: st <= M_IDLE;
      endcase
    end
  end
endmodule

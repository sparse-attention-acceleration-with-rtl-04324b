// sprint_top: single-head sparse attention system in its small configuration
// (one CORELET, 16 KB of key/value buffers), together with behavioural models
// of the ReRAM main memory it relies on.
//
//   host load --> tarray (K MSBs, column per key) + 16 x reram_std (Q, K LSBs, V)
//   mem_ctrl  --> CopyQ / ReadP / TRead to tarray, reads to reram_std,
//                 q, pruning vector, on-chip key indices and fetched pairs
//   corelet   --> exact scores, softmax, weighted sum of values
//
// Loading: with ld_valid, token ld_tok's query, key and value (64 x 8 bit
// each) are written; the key is split into its 4 MSBs (transposable arrays)
// and 4 LSBs (standard ReRAM of channel ld_tok mod 16). th_we sets the
// in-memory pruning threshold, compared with the 4-bit x 4-bit dot product
// of query and key MSBs. A pulse on start processes queries 0..valid_len-1
// against keys 0..valid_len-1 (tokens from valid_len on are padding and are
// neither read nor computed). Attention vectors leave in query order on
// out_valid/out_idx/out_vec (64 x 16 bit, 8 fraction bits), with out_ready
// back-pressure. The cnt_* outputs count fetched keys, keys reused from the
// buffers, keys dropped because more than 128 were unpruned, finished
// queries and compute stalls caused by buffer writes.
module sprint_top
  import sprint_pkg::*;
#(
  parameter int unsigned S = SEQ_MAX
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ld_valid,
  input  logic [$clog2(S)-1:0] ld_tok,
  input  logic [VEC_W-1:0]     ld_q,
  input  logic [VEC_W-1:0]     ld_k,
  input  logic [VEC_W-1:0]     ld_v,
  input  logic                 th_we,
  input  logic signed [15:0]   th,
  input  logic                 start,
  input  logic [$clog2(S):0]   valid_len,
  output logic                 busy,
  output logic                 out_valid,
  output logic [$clog2(S)-1:0] out_idx,
  output logic [D*OUT_W-1:0]   out_vec,
  input  logic                 out_ready,
  output logic [31:0]          cnt_fetch,
  output logic [31:0]          cnt_reuse,
  output logic [31:0]          cnt_ovf,
  output logic [31:0]          cnt_query,
  output logic [31:0]          cnt_stall
);
  localparam int unsigned TW  = $clog2(S);
  localparam int unsigned CHB = $clog2(NCH);
  localparam int unsigned RW  = $clog2(S / NCH);

  // key split into MSB and LSB nibbles
  logic [NIB_W-1:0] ld_kmsb, ld_klsb;
  always_comb begin
    for (int i = 0; i < D; i++) begin
      ld_kmsb[i*NW +: NW] = ld_k[i*EW + NW +: NW];
      ld_klsb[i*NW +: NW] = ld_k[i*EW +: NW];
    end
  end

  // transposable ReRAM
  logic             ta_cmd_valid, ta_start, ta_busy, ta_rd_valid;
  mem_cmd_e         ta_cmd;
  logic [TW-1:0]    ta_addr;
  logic [CH_W-1:0]  ta_wdata;
  logic [NIB_W-1:0] ta_rd_data;
  tarray #(.NROW(D), .NCOL(S)) u_tarray (
    .clk, .rst_n, .wr_en(ld_valid), .wr_col(ld_tok), .wr_data(ld_kmsb),
    .th_we, .th,
    .cmd_valid(ta_cmd_valid), .cmd(ta_cmd), .cmd_addr(ta_addr), .cmd_start(ta_start),
    .cmd_wdata(ta_wdata), .busy(ta_busy), .rd_valid(ta_rd_valid), .rd_data(ta_rd_data));

  // standard ReRAM channels
  logic [NCH-1:0]   ch_req_valid, ch_req_ready, ch_req_kv, ch_resp_valid;
  logic [RW-1:0]    ch_req_row   [NCH];
  logic [VEC_W-1:0] ch_resp_q    [NCH];
  logic [NIB_W-1:0] ch_resp_klsb [NCH];
  logic [VEC_W-1:0] ch_resp_v    [NCH];
  for (genvar c = 0; c < NCH; c++) begin : g_std
    reram_std #(.ROWS(S / NCH)) u_std (
      .clk, .rst_n,
      .wr_en(ld_valid && ld_tok[CHB-1:0] == CHB'(c)), .wr_row(ld_tok[TW-1:CHB]),
      .wr_q(ld_q), .wr_klsb(ld_klsb), .wr_v(ld_v),
      .req_valid(ch_req_valid[c]), .req_ready(ch_req_ready[c]), .req_kv(ch_req_kv[c]),
      .req_row(ch_req_row[c]), .resp_valid(ch_resp_valid[c]), .resp_q(ch_resp_q[c]),
      .resp_klsb(ch_resp_klsb[c]), .resp_v(ch_resp_v[c]));
  end

  // memory controller <-> CORELET
  logic               q_valid, q_first, loc_valid, loc_ready, fill_valid, fill_ready, corelet_done;
  logic [VEC_W-1:0]   q_data;
  logic [TW-1:0]      q_idx, loc_tok;
  logic [S-1:0]       p_vec;
  logic [$clog2(KV_ENTRIES):0] n_unp;
  fill_t              fill;

  mem_ctrl #(.S(S)) u_mc (
    .clk, .rst_n, .start, .valid_len, .busy,
    .ta_cmd_valid, .ta_cmd, .ta_addr, .ta_start, .ta_wdata, .ta_rd_valid, .ta_rd_data,
    .ch_req_valid, .ch_req_ready, .ch_req_kv, .ch_req_row,
    .ch_resp_valid, .ch_resp_q, .ch_resp_klsb, .ch_resp_v,
    .q_valid, .q_first, .q_data, .q_idx, .p_vec, .n_unp,
    .loc_valid, .loc_tok, .loc_ready, .fill_valid, .fill, .fill_ready, .corelet_done,
    .cnt_fetch, .cnt_reuse, .cnt_ovf, .cnt_query);

  corelet #(.S(S)) u_corelet (
    .clk, .rst_n, .q_valid, .q_first, .q_data, .q_idx, .p_vec, .n_unp,
    .loc_valid, .loc_tok, .loc_ready, .fill_valid, .fill, .fill_ready,
    .corelet_done, .out_valid, .out_idx, .out_vec, .out_ready, .cnt_stall);
endmodule

// qk_pu: query-key processing unit with its query buffer (Q-buf).
//
// The Q-buf holds the 64 x 8-bit query of the current window (q_load). For
// each key presented on k_valid the unit forms, in one cycle, the two
// partial dot products of the query with the key's 4-bit MSB nibbles
// (signed) and with its 4-bit LSB nibbles (unsigned) on a 64-way 8x8 MAC
// array, and merges them in the adder tree as  q.k = 16*(q.K_MSB) + q.K_LSB,
// the exact 8-bit recomputation of the score. The score is then shifted right
// by SCORE_SHIFT (3, i.e. 1/sqrt(64)) and saturated to the 12-bit softmax
// input. Result and its tag appear one cycle after the key (s_valid).
// The nibble split and the scaling are this design's choices.
module qk_pu
  import sprint_pkg::*;
#(
  parameter int unsigned SCORE_SHIFT = 3,
  parameter int unsigned TAG_W       = 7
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      q_load,
  input  logic [VEC_W-1:0]          q_in,
  input  logic                      k_valid,
  input  logic [NIB_W-1:0]          k_msb,
  input  logic [NIB_W-1:0]          k_lsb,
  input  logic [TAG_W-1:0]          k_tag,
  output logic                      s_valid,
  output logic signed [SCORE_W-1:0] score,
  output logic [TAG_W-1:0]          s_tag
);
  logic [VEC_W-1:0] qbuf;

  function automatic logic signed [SCORE_W-1:0] dot_score(input logic [VEC_W-1:0] q,
                                                          input logic [NIB_W-1:0] km,
                                                          input logic [NIB_W-1:0] kl);
    logic signed [31:0] pm, pl, full, sh;
    pm = 0;
    pl = 0;
    for (int i = 0; i < D; i++) begin
      pm += 32'($signed(q[i*EW +: EW])) * 32'($signed(km[i*NW +: NW]));
      pl += 32'($signed(q[i*EW +: EW])) * $signed({28'd0, kl[i*NW +: NW]});
    end
    full = (pm <<< NW) + pl;
    sh   = full >>> SCORE_SHIFT;
    if (sh > 32'sd2047)       return 12'sd2047;
    else if (sh < -32'sd2048) return -12'sd2048;
    else                      return sh[SCORE_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qbuf    <= '0;
      s_valid <= 1'b0;
      score   <= '0;
      s_tag   <= '0;
    end else begin
      if (q_load) qbuf <= q_in;
      s_valid <= k_valid;
      if (k_valid) begin
        score <= dot_score(qbuf, k_msb, k_lsb);
        s_tag <= k_tag;
      end
    end
  end
endmodule

// softmax: turns the 12-bit scores of one query into 8-bit probabilities.
//
// exp is taken with two 64-entry x 8-bit look-up tables: the 12-bit argument
// u = 2047 - score is split into its 6 MSBs and 6 LSBs and
//   exp_hi[u[11:6]] * exp_lo[u[5:0]] ~ 255*255 * exp((score - 2047) / 256),
// i.e. the score is read as a fixed-point number with 8 fraction bits and
// offset so both table arguments are non-negative; the offset cancels in the
// normalisation. Table contents (rtl/exp_hi.hex, rtl/exp_lo.hex):
//   exp_hi[h] = round(255 * exp(-h / 4)),  exp_lo[l] = round(255 * exp(-l / 256)).
// The 16-bit exponents stream into a FIFO while a 24-bit adder accumulates
// their sum. Once n_total scores have arrived, the FIFO is drained one entry
// per cycle into two dividers used alternately; each divider has two cycles
// for  prob = min(255, (exp * 256) / sum),  so together they produce one
// probability per cycle in arrival order (p_valid, prob, p_tag). `done`
// rises when all n_total probabilities have left and stays high until clr.
// Timing: the exponent is registered one cycle after s_valid; the first
// probability leaves three cycles after normalisation starts.
// The fixed-point format and table formulas are this design's choices.
module softmax
  import sprint_pkg::*;
#(
  parameter int unsigned TAG_W      = 7,
  parameter int unsigned FIFO_DEPTH = KV_ENTRIES,
  parameter int unsigned CNT_W      = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clr,
  input  logic [CNT_W-1:0]          n_total,
  input  logic                      s_valid,
  input  logic signed [SCORE_W-1:0] score,
  input  logic [TAG_W-1:0]          s_tag,
  output logic                      p_valid,
  output logic [PROB_W-1:0]         prob,
  output logic [TAG_W-1:0]          p_tag,
  output logic                      done
);
  logic [7:0] exp_hi [64];
  logic [7:0] exp_lo [64];
  initial begin
    $readmemh("rtl/exp_hi.hex", exp_hi);
    $readmemh("rtl/exp_lo.hex", exp_lo);
  end

  typedef enum logic [1:0] {S_ACC, S_NORM, S_DONE} state_e;
  state_e state;

  logic [CNT_W-1:0] n_tot, rcv, sent;
  logic [23:0]      sum;

  // exponent stage
  logic [11:0]      u;
  logic             e_v;
  logic [15:0]      e_val;
  logic [TAG_W-1:0] e_tag;
  assign u = 12'(13'sd2047 - 13'(score));

  // FIFO of exponents
  logic                   f_pop, f_empty, f_full;
  logic [TAG_W+15:0]      f_dout;
  sync_fifo #(.W(TAG_W+16), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .clr,
    .push(e_v), .din({e_tag, e_val}),
    .pop(f_pop), .dout(f_dout), .empty(f_empty), .full(f_full)
  );

  // two dividers, issued alternately
  logic             sel;
  logic [1:0]       d_busy;
  logic [1:0]       d_age;
  logic [15:0]      d_a   [2];
  logic [TAG_W-1:0] d_tag [2];

  function automatic logic [PROB_W-1:0] divide(input logic [15:0] a, input logic [23:0] s);
    logic [23:0] qt;
    if (s == 0) return '0;
    qt = {a, 8'd0} / s;
    return (qt > 24'd255) ? 8'd255 : qt[7:0];
  endfunction

  assign f_pop = (state == S_NORM) && !f_empty && (!d_busy[sel] || d_age[sel]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_v   <= 1'b0;
      e_val <= '0;
      e_tag <= '0;
    end else begin
      e_v <= s_valid && !clr;
      if (s_valid) begin
        e_val <= 16'(exp_hi[u[11:6]]) * 16'(exp_lo[u[5:0]]);
        e_tag <= s_tag;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_DONE;
      n_tot   <= '0;
      rcv     <= '0;
      sent    <= '0;
      sum     <= '0;
      sel     <= 1'b0;
      d_busy  <= '0;
      d_age   <= '0;
      d_a[0]  <= '0; d_a[1] <= '0;
      d_tag[0] <= '0; d_tag[1] <= '0;
      p_valid <= 1'b0;
      prob    <= '0;
      p_tag   <= '0;
    end else if (clr) begin
      state   <= S_ACC;
      n_tot   <= n_total;
      rcv     <= '0;
      sent    <= '0;
      sum     <= '0;
      sel     <= 1'b0;
      d_busy  <= '0;
      p_valid <= 1'b0;
    end else begin
      p_valid <= 1'b0;
      if (e_v) begin
        sum <= sum + 24'(e_val);
        rcv <= rcv + 1'b1;
      end
      case (state)
        S_ACC:  if (rcv == n_tot && !e_v) state <= S_NORM;
        S_NORM: if (sent == n_tot) state <= S_DONE;
        default: ;
      endcase
      // each divider finishes in its second cycle and may take a new
      // exponent in that same cycle
      for (int k = 0; k < 2; k++) begin
        if (d_busy[k]) begin
          if (d_age[k] == 1'b1) begin
            d_busy[k] <= 1'b0;
            p_valid   <= 1'b1;
            prob      <= divide(d_a[k], sum);
            p_tag     <= d_tag[k];
            sent      <= sent + 1'b1;
          end else begin
            d_age[k] <= 1'b1;
          end
        end
      end
      // issue
      if (f_pop) begin
        d_a[sel]    <= f_dout[15:0];
        d_tag[sel]  <= f_dout[TAG_W+15:16];
        d_busy[sel] <= 1'b1;
        d_age[sel]  <= 1'b0;
        sel         <= ~sel;
      end
    end
  end

  assign done = (state == S_DONE) && !p_valid;
endmodule

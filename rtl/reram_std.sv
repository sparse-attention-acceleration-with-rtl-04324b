// reram_std: behavioural model of one channel of standard (storage-only)
// ReRAM. It keeps, for each token mapped to this channel, the 8-bit query
// vector, the 4-bit LSB part of the key and the 8-bit value vector.
//
// This is a behavioural model of main memory, not logic of the accelerator.
// Tokens are interleaved over channels (token j lives on channel j mod NCH,
// row j / NCH). A read is accepted when req_ready is high; the data come
// back on resp_valid after T_RCD + T_CL plus the burst length on the 64-bit
// channel: 8 beats for a query (512 bits) and 12 beats for a key-LSB plus
// value pair (256 + 512 bits). One read is outstanding at a time. The timing
// numbers are this design's assumptions. Host writes use wr_*.
module reram_std
  import sprint_pkg::*;
#(
  parameter int unsigned ROWS = SEQ_MAX / NCH,
  parameter int unsigned TRCD = T_RCD,
  parameter int unsigned TCL  = T_CL
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_en,
  input  logic [$clog2(ROWS)-1:0] wr_row,
  input  logic [VEC_W-1:0]        wr_q,
  input  logic [NIB_W-1:0]        wr_klsb,
  input  logic [VEC_W-1:0]        wr_v,
  input  logic                    req_valid,
  output logic                    req_ready,
  input  logic                    req_kv,     // 1: K_LSB + V, 0: Q
  input  logic [$clog2(ROWS)-1:0] req_row,
  output logic                    resp_valid,
  output logic [VEC_W-1:0]        resp_q,
  output logic [NIB_W-1:0]        resp_klsb,
  output logic [VEC_W-1:0]        resp_v
);
  localparam int unsigned LAT_Q  = TRCD + TCL + VEC_W / CH_W;
  localparam int unsigned LAT_KV = TRCD + TCL + (NIB_W + VEC_W) / CH_W;

  logic [VEC_W-1:0] mq [ROWS];
  logic [NIB_W-1:0] mk [ROWS];
  logic [VEC_W-1:0] mv [ROWS];

  logic                    pend;
  logic [$clog2(ROWS)-1:0] row_r;
  logic [7:0]              cnt;

  always_ff @(posedge clk) begin
    if (wr_en) begin
      mq[wr_row] <= wr_q;
      mk[wr_row] <= wr_klsb;
      mv[wr_row] <= wr_v;
    end
  end

  assign req_ready = !pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend       <= 1'b0;
      row_r      <= '0;
      cnt        <= '0;
      resp_valid <= 1'b0;
      resp_q     <= '0;
      resp_klsb  <= '0;
      resp_v     <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        pend  <= 1'b1;
        row_r <= req_row;
        cnt   <= 8'(req_kv ? LAT_KV - 1 : LAT_Q - 1);
      end else if (pend) begin
        if (cnt == 0) begin
          pend       <= 1'b0;
          resp_valid <= 1'b1;
          resp_q     <= mq[row_r];
          resp_klsb  <= mk[row_r];
          resp_v     <= mv[row_r];
        end else begin
          cnt <= cnt - 1'b1;
        end
      end
    end
  end

endmodule

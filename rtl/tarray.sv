// tarray: behavioural model of the transposable ReRAM arrays that hold the
// 4-bit MSB part of every key and prune keys in memory.
//
// This is a behavioural model, not synthesizable logic of the real part: the
// analog dot product along each bitline, the per-column analog comparator
// against V_th and the 1-bit ADC behind it are modelled as exact integer
// arithmetic (no circuit noise). The thresholding of all columns is one loop
// of NCOL x NROW multiply-adds evaluated in a single cycle; it describes the
// array's behaviour and is not meant to be synthesized as logic.
//
// Key j is stored down column j (64 rows of 4-bit cells, one row per
// embedding element). The full column space is NCOL = 4096 keys, i.e. 32
// tiled 64x128 arrays driven by the same query. Three commands:
//   CopyQ  (cmd_addr = 0..3) writes 16 query MSB nibbles (cmd_wdata) into the
//          in-memory query buffer; cmd_start=1 on the last CopyQ starts the
//          thresholding, which keeps `busy` high for T_AXTH cycles.
//   ReadP  (cmd_addr = chunk) returns 64 pruning bits in rd_data[63:0]:
//          bit = 1 when sum_i q_msb[i]*k_msb[i][j] < threshold (pruned).
//   TRead  (cmd_addr = column) returns the 64 MSB nibbles of that key.
// ReadP and TRead data appear on rd_valid/rd_data exactly T_CL cycles after
// the command. Nibbles are two's-complement. Issuing a command while busy is
// a protocol error and is caught by an assertion. The host programs keys
// through wr_en/wr_col/wr_data and the threshold through th_we/th.
module tarray
  import sprint_pkg::*;
#(
  parameter int unsigned NROW  = D,
  parameter int unsigned NCOL  = SEQ_MAX,
  parameter int unsigned TAXTH = T_AXTH,
  parameter int unsigned TCL   = T_CL
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host programming
  input  logic                     wr_en,
  input  logic [$clog2(NCOL)-1:0]  wr_col,
  input  logic [NROW*NW-1:0]       wr_data,
  input  logic                     th_we,
  input  logic signed [15:0]       th,
  // command interface
  input  logic                     cmd_valid,
  input  mem_cmd_e                 cmd,
  input  logic [$clog2(NCOL)-1:0]  cmd_addr,
  input  logic                     cmd_start,
  input  logic [CH_W-1:0]          cmd_wdata,
  output logic                     busy,
  output logic                     rd_valid,
  output logic [NROW*NW-1:0]       rd_data
);
  localparam int unsigned QCH = NROW * NW / CH_W;   // CopyQ chunks (4)

  logic [NROW*NW-1:0] cells [NCOL];
  logic [NROW*NW-1:0] qbuf;
  logic [NCOL-1:0]    pvec;
  logic signed [15:0] th_r;
  logic [$clog2(TAXTH+1)-1:0] cnt;

  logic               dl_v [TCL];
  logic [NROW*NW-1:0] dl_d [TCL];

  always_ff @(posedge clk) begin
    if (wr_en) cells[wr_col] <= wr_data;
  end

  // in-memory dot product and threshold of every column
  function automatic logic [NCOL-1:0] threshold_all(input logic [NROW*NW-1:0] q,
                                                    input logic signed [15:0] t);
    logic [NCOL-1:0] p;
    for (int j = 0; j < NCOL; j++) begin
      int acc;
      acc = 0;
      for (int i = 0; i < NROW; i++)
        acc += int'($signed(q[i*NW +: NW])) * int'($signed(cells[j][i*NW +: NW]));
      p[j] = (acc < int'(t));
    end
    return p;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      th_r <= '0;
      busy <= 1'b0;
      cnt  <= '0;
      qbuf <= '0;
      pvec <= '1;
    end else begin
      if (th_we) th_r <= th;
      if (cmd_valid && cmd == CMD_COPYQ) begin
        qbuf[cmd_addr[$clog2(QCH)-1:0]*CH_W +: CH_W] <= cmd_wdata;
        if (cmd_start) begin
          busy <= 1'b1;
          cnt  <= ($clog2(TAXTH+1))'(TAXTH - 1);
        end
      end
      if (busy) begin
        if (cnt == 0) begin
          busy <= 1'b0;
          pvec <= threshold_all(qbuf, th_r);
        end else begin
          cnt <= cnt - 1'b1;
        end
      end
    end
  end

  // read pipeline: T_CL cycles from command to data
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < TCL; k++) begin
        dl_v[k] <= 1'b0;
        dl_d[k] <= '0;
      end
    end else begin
      dl_v[0] <= cmd_valid && (cmd == CMD_READP || cmd == CMD_TREAD);
      dl_d[0] <= (cmd == CMD_READP)
                 ? (NROW*NW)'(pvec[cmd_addr[$clog2(NCOL/CH_W)-1:0]*CH_W +: CH_W])
                 : cells[cmd_addr];
      for (int k = 1; k < TCL; k++) begin
        dl_v[k] <= dl_v[k-1];
        dl_d[k] <= dl_d[k-1];
      end
    end
  end

  assign rd_valid = dl_v[TCL-1];
  assign rd_data  = dl_d[TCL-1];

  // no command may be issued while the arrays are thresholding
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !cmd_valid)
    else $error("tarray: command issued during in-memory thresholding");

endmodule

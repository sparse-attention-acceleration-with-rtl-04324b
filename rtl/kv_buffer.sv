// kv_buffer: one on-chip key or value buffer built from single-port SRAM
// banks with a 128-bit port each. All banks share the address, so one access
// moves NBANK*128 bits: a 64-element vector of 4-bit nibbles (2 banks) or of
// 8-bit values (4 banks). The 16 KB of the small configuration are 8 such
// banks of 128 x 128 bit: 2 for key MSBs, 2 for key LSBs, 4 for values (the
// split is this design's choice).
// Timing: a write (we=1) takes the port for that cycle; otherwise the word
// at addr appears on rdata after the next clock edge.
module kv_buffer #(
  parameter int unsigned NBANK  = 4,
  parameter int unsigned BANK_W = 128,
  parameter int unsigned DEPTH  = 128
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  addr,
  input  logic [NBANK*BANK_W-1:0]   wdata,
  output logic [NBANK*BANK_W-1:0]   rdata
);
  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic [BANK_W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we) mem[addr] <= wdata[b*BANK_W +: BANK_W];
      else    rdata[b*BANK_W +: BANK_W] <= mem[addr];
    end
  end
endmodule

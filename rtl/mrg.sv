// mrg: memory request generator (MRG) engine; the key index generator (KIG)
// is the same circuit applied to the spatial-locality vector.
//
// One engine serves one memory channel. Its base register holds the first
// key index stored on that channel; an up counter starts at zero when a new
// vector arrives (start) and steps by the number of channels, so the engine
// visits keys base, base+NCH, base+2*NCH, ... one bit per cycle. A '0' is
// skipped; a '1' is offered as idx on idx_valid and the counter waits until
// idx_ready accepts it. `done` is high once the whole vector is visited and
// stays high until the next start. `vec` must stay stable while scanning.
// Back-pressure through idx_ready is this design's choice.
module mrg #(
  parameter int unsigned S   = 4096,
  parameter int unsigned NCH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [S-1:0]           vec,
  input  logic [$clog2(NCH)-1:0] base,
  output logic                   idx_valid,
  output logic [$clog2(S)-1:0]   idx,
  input  logic                   idx_ready,
  output logic                   done
);
  localparam int unsigned CW = $clog2(S) + 1;
  logic [CW-1:0] cnt;     // up counter, steps by NCH
  logic [CW-1:0] pos;
  logic          active;

  assign pos       = cnt + CW'(base);
  assign idx       = pos[CW-2:0];
  assign idx_valid = active && vec[idx];
  assign done      = !active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= '0;
      active <= 1'b0;
    end else if (start) begin
      cnt    <= '0;
      active <= 1'b1;
    end else if (active && (!vec[idx] || idx_ready)) begin
      if (pos + CW'(NCH) >= CW'(S)) active <= 1'b0;
      cnt <= cnt + CW'(NCH);
    end
  end
endmodule

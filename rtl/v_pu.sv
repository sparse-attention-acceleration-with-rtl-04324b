// v_pu: value processing unit. A 64-way 8x8-bit MAC array multiplies each
// value vector (64 signed 8-bit elements) by its softmax probability
// (unsigned 8 bit, scaled by 256) and adds the products into 64 accumulators
// of 24 bits. clr zeroes them at the start of a query. out_vec is the
// attention vector: each accumulator saturated to 16 bits (8 fraction bits).
// One (prob, v) pair is taken per cycle on p_valid; out_vec reflects it one
// cycle later. Accumulator width and output format are this design's choices.
module v_pu
  import sprint_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clr,
  input  logic                   p_valid,
  input  logic [PROB_W-1:0]      prob,
  input  logic [VEC_W-1:0]       v,
  output logic [D*OUT_W-1:0]     out_vec
);
  logic signed [23:0] acc [D];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < D; i++) acc[i] <= '0;
    end else if (clr) begin
      for (int i = 0; i < D; i++) acc[i] <= '0;
    end else if (p_valid) begin
      for (int i = 0; i < D; i++)
        acc[i] <= acc[i] + 24'($signed(v[i*EW +: EW]) * $signed({1'b0, prob}));
    end
  end

  always_comb begin
    for (int i = 0; i < D; i++) begin
      if (acc[i] > 24'sd32767)       out_vec[i*OUT_W +: OUT_W] = 16'h7fff;
      else if (acc[i] < -24'sd32768) out_vec[i*OUT_W +: OUT_W] = 16'h8000;
      else                           out_vec[i*OUT_W +: OUT_W] = acc[i][OUT_W-1:0];
    end
  end
endmodule

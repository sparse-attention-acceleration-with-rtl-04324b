// sld: spatial locality detection engine of the memory controller front end.
//
// Given the pruning vector of the previous query (p_prev) and of the current
// query (p_cur), where a '1' marks a pruned key, it forms
//   req_vec = p_prev & ~p_cur   keys newly needed: fetch them from memory
//   loc_vec = ~p_prev & ~p_cur  keys needed again: already in the K/V buffers
// exactly as the paper's two equations. Purely combinational; the memory
// controller registers the result before the request/index generators scan it.
module sld #(
  parameter int unsigned S = 4096
) (
  input  logic [S-1:0] p_prev,
  input  logic [S-1:0] p_cur,
  output logic [S-1:0] req_vec,
  output logic [S-1:0] loc_vec
);
  assign req_vec = p_prev & ~p_cur;
  assign loc_vec = ~p_prev & ~p_cur;
endmodule

// tb_sld: checks the spatial locality detection equations on random and
// corner-case pruning vectors (all pruned, none pruned) against a bit-by-bit
// reference: a key is requested when it was pruned before and is needed
// now, and counted as local when it is needed in both queries.
module tb_sld;
  localparam int unsigned S = 64;
  logic [S-1:0] p_prev, p_cur, req_vec, loc_vec;
  int checks = 0, failures = 0;
  sld #(.S(S)) dut (.*);
  task automatic check();
    #1;
    for (int j = 0; j < S; j++) begin
      checks++;
      if (req_vec[j] != (p_prev[j] == 1'b1 && p_cur[j] == 1'b0) ||
          loc_vec[j] != (p_prev[j] == 1'b0 && p_cur[j] == 1'b0)) failures++;
    end
  endtask
  initial begin
    p_prev = '1; p_cur = '0; check();
    p_prev = '0; p_cur = '0; check();
    p_prev = '0; p_cur = '1; check();
    for (int n = 0; n < 50; n++) begin
      p_prev = {$urandom, $urandom}; p_cur = {$urandom, $urandom}; check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

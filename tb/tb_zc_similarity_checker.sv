// tb_zc_similarity_checker: checks the difference count and the strict
// "count below limit" decision for the four limits 7, 13, 16, 20, with every
// count from 0 to 64 and random bit positions.
module tb_zc_similarity_checker;
  import zc_pkg::*;
  import tb_zc_ref_pkg::*;
  logic [63:0] x;
  sim_e        sel;
  logic [6:0]  cnt;
  logic        sim;
  int checks = 0, failures = 0;

  zc_similarity_checker dut (.xored_i(x), .sel_i(sel), .count_o(cnt), .similar_o(sim));

  // A word with exactly n ones at random places.
  function automatic logic [63:0] ones(int n);
    logic [63:0] v = '0;
    while ($countones(v) < n) v[$urandom % 64] = 1'b1;
    return v;
  endfunction

  initial begin
    for (int rep = 0; rep < 8; rep++)
      for (int s = 0; s < 4; s++)
        for (int n = 0; n <= 64; n++) begin
          x = ones(n); sel = sim_e'(s);
          #1;
          checks++;
          if (cnt !== 7'(n) || sim !== (n < ref_limit(sel))) begin
            failures++;
            $display("FAIL similarity sel=%0d n=%0d cnt=%0d sim=%b", s, n, cnt, sim);
          end
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

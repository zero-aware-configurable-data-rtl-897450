// zc_similarity_checker: similarity limit check of the ZAC-DEST sender.
//
// Adds up the ones of the bitwise difference (7-bit count, 0..64) and
// compares it with a limit chosen from LIMITS by sel_i. The paper's limits
// are 7, 13, 16 and 20 differing bits of 64 (90 %, 80 %, 75 %, 70 % alike).
// similar_o is 1 when count < limit; the paper states the strict form in its
// algorithm and circuit text, though one sentence says "not more than". The
// comparison is written as limit >= count + 1 to match the drawn comparator.
// Purely combinational.
module zc_similarity_checker
  import zc_pkg::*;
#(
  parameter logic [3:0][CNT_W-1:0] LIMITS = {7'd20, 7'd16, 7'd13, 7'd7}
) (
  input  logic [W-1:0]     xored_i,
  input  sim_e             sel_i,
  output logic [CNT_W-1:0] count_o,
  output logic             similar_o
);
  logic [CNT_W:0] limit;

  always_comb begin
    count_o   = popcount64(xored_i);
    limit     = {1'b0, LIMITS[sel_i]};
    similar_o = limit >= ({1'b0, count_o} + 8'd1);
  end
endmodule

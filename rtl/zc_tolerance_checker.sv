// zc_tolerance_checker: protected-MSB check of the ZAC-DEST sender.
//
// xored_i is the bitwise difference between the word to send and the most
// similar table entry. The k most significant bits of every N-bit chunk
// ((N,k) chosen by sel_i, same eight settings as truncation) must not be
// approximated: ok_o is 1 only when none of them differs (mux then NOR, as in
// the paper). GRAN_NONE, this design's addition, protects nothing (ok_o = 1).
// Purely combinational.
module zc_tolerance_checker
  import zc_pkg::*;
(
  input  logic [W-1:0] xored_i,
  input  gran_e        sel_i,
  output logic         ok_o
);
  assign ok_o = ~|(xored_i & msb_mask(sel_i));
endmodule

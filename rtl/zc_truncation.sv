// zc_truncation: LSB truncation of the ZAC-DEST sender.
//
// Clears the k least significant bits of every N-bit chunk of the 64-bit word,
// (N,k) chosen by sel_i among 64,16 64,8 32,8 32,4 16,4 16,2 8,2 8,1, i.e.
// N/4 or N/8 bits of N = 8, 16, 32 or 64 bit values, as in the paper. The
// setting GRAN_NONE (this design's addition) leaves the word unchanged.
// mask_o marks the cleared positions; it drives the data table's truncation
// lines so that those bits are not compared. Purely combinational: a mux of
// constant masks followed by an AND, as in the paper's circuit.
module zc_truncation
  import zc_pkg::*;
(
  input  logic [W-1:0] data_i,
  input  gran_e        sel_i,
  output logic [W-1:0] data_o,
  output logic [W-1:0] mask_o
);
  always_comb begin
    mask_o = lsb_mask(sel_i);
    data_o = data_i & ~mask_o;
  end
endmodule

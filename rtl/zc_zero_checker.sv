// zc_zero_checker: all-zero detector of the ZAC-DEST sender.
//
// A wide NOR of the word: zero_o is 1 only when every bit of data_i is 0.
// An all-zero word is the cheapest thing a Pseudo Open Drain line can carry,
// so the encoder sends it as it is, without table search, DBI flags or table
// update. Purely combinational. The NOR follows the paper; feeding it the
// truncated word (so a word whose only ones are truncated counts as zero)
// follows the paper's algorithm listing and is wired up in zc_encoder.
module zc_zero_checker #(
  parameter int unsigned W = zc_pkg::W
) (
  input  logic [W-1:0] data_i,
  output logic         zero_o
);
  assign zero_o = ~|data_i;
endmodule

// zc_dbi: Dynamic Bus Inversion of the final output word.
//
// The 64-bit word goes out as eight 8-bit beats. Every byte holding more than
// four ones is inverted and its flag set, so no beat carries more than four
// ones on a Pseudo Open Drain bus; exactly four is left alone. flag_o[b] = 1
// means byte b was inverted (the polarity is this design's choice; the DDR4
// pin itself is active low). Purely combinational.
module zc_dbi
  import zc_pkg::*;
(
  input  logic [W-1:0]     data_i,
  output logic [W-1:0]     data_o,
  output logic [BEATS-1:0] flag_o
);
  always_comb begin
    for (int unsigned b = 0; b < BEATS; b++) begin
      logic [3:0] ones;
      ones = '0;
      for (int unsigned i = 0; i < BEAT_W; i++) ones = ones + 4'(data_i[b*BEAT_W + i]);
      flag_o[b] = ones > 4'd4;
    end
    data_o = apply_dbi(data_i, flag_o);
  end
endmodule

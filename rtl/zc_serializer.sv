// zc_serializer: burst serializer of one DRAM chip (the SERDES after the
// encoder).
//
// Sends a coded word as BEATS beats on the chip's pins: beat b carries data
// byte b on dq, DBI flag b on the DBI line and bit b of the index-line word
// on the index line; strobe is 1 on every beat of a burst. A word is taken
// when in_valid_i && in_ready_o; its first beat is on beat_o the next cycle
// and one beat follows per cycle. in_ready_o is high when idle and on the last
// beat, so bursts can run back to back with no gap. The paper gives only the
// 64-to-8 widths; beat order, single data rate and the strobe are this
// design's choices.
module zc_serializer
  import zc_pkg::*;
(
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         in_valid_i,
  output logic         in_ready_o,
  input  zc_enc_word_t in_i,
  output zc_beat_t     beat_o
);
  zc_enc_word_t             word_q;
  logic [$clog2(BEATS)-1:0] cnt_q;
  logic                     busy_q;
  logic                     last;

  assign last       = (cnt_q == $clog2(BEATS)'(BEATS - 1));
  assign in_ready_o = !busy_q || last;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      word_q <= '0;
      cnt_q  <= '0;
      busy_q <= 1'b0;
    end else if (in_valid_i && in_ready_o) begin
      word_q <= in_i;
      cnt_q  <= '0;
      busy_q <= 1'b1;
    end else if (busy_q) begin
      cnt_q  <= cnt_q + 1'b1;
      busy_q <= !last;
    end
  end

  always_comb begin
    logic [BEATS-1:0] side;
    side          = word_q.side;
    beat_o.strobe = busy_q;
    beat_o.dq     = busy_q ? word_q.data[cnt_q*BEAT_W +: BEAT_W] : '0;
    beat_o.dbi    = busy_q & word_q.dbi[cnt_q];
    beat_o.idx    = busy_q & side[cnt_q];
  end

endmodule

// zc_deserializer: burst deserializer on the memory-controller side.
//
// Collects the BEATS beats of a burst (beats marked by strobe, byte b on beat
// b) back into a coded word: data byte, DBI flag and index-line bit of each
// beat. out_valid_o pulses for one cycle, the cycle after the last beat, with
// the whole word on out_o. Mirror of zc_serializer; the paper does not draw
// the receiving side, so its timing is this design's choice.
module zc_deserializer
  import zc_pkg::*;
(
  input  logic         clk_i,
  input  logic         rst_ni,
  input  zc_beat_t     beat_i,
  output logic         out_valid_o,
  output zc_enc_word_t out_o
);
  logic [W-1:0]             data_q;
  logic [BEATS-1:0]         dbi_q, side_q;
  logic [$clog2(BEATS)-1:0] cnt_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      data_q      <= '0;
      dbi_q       <= '0;
      side_q      <= '0;
      cnt_q       <= '0;
      out_valid_o <= 1'b0;
      out_o       <= '0;
    end else begin
      out_valid_o <= 1'b0;
      if (beat_i.strobe) begin
        data_q[cnt_q*BEAT_W +: BEAT_W] <= beat_i.dq;
        dbi_q[cnt_q]  <= beat_i.dbi;
        side_q[cnt_q] <= beat_i.idx;
        cnt_q         <= cnt_q + 1'b1;
        if (cnt_q == $clog2(BEATS)'(BEATS - 1)) begin
          out_valid_o                          <= 1'b1;
          out_o.data                           <= data_q;
          out_o.data[cnt_q*BEAT_W +: BEAT_W]   <= beat_i.dq;
          out_o.dbi                            <= dbi_q;
          out_o.dbi[cnt_q]                     <= beat_i.dbi;
          out_o.side                           <= side_q;
          out_o.side[cnt_q]                    <= beat_i.idx;
        end
      end
    end
  end

endmodule

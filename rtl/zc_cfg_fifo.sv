// zc_cfg_fifo: small first-in first-out queue of access settings.
//
// The controller side must decode each returning burst with the settings it
// was sent with (the truncation choice decides which bits of a stored word are
// valid). This queue remembers the setting of every access between the moment
// the chips accept it and the moment its burst is rebuilt. push_i stores
// data_i; head_o is the oldest entry, removed by pop_i. DEPTH covers the
// words that can be in flight (encoder output, serializer, deserializer).
// Helper of zc_channel; the paper only says the settings travel on spare
// column-address lines.
module zc_cfg_fifo
  import zc_pkg::*;
#(
  parameter int unsigned DEPTH = 4,
  localparam int unsigned PTR_W = $clog2(DEPTH)
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  input  logic    push_i,
  input  zc_cfg_t data_i,
  input  logic    pop_i,
  output zc_cfg_t head_o,
  output logic    empty_o,
  output logic    full_o
);
  zc_cfg_t        mem [DEPTH];
  logic [PTR_W-1:0] rd_q, wr_q;
  logic [PTR_W:0]   cnt_q;

  assign empty_o = (cnt_q == '0);
  assign full_o  = (cnt_q == (PTR_W+1)'(DEPTH));
  assign head_o  = mem[rd_q];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push_i) wr_q <= (wr_q == PTR_W'(DEPTH - 1)) ? '0 : wr_q + 1'b1;
      if (pop_i)  rd_q <= (rd_q == PTR_W'(DEPTH - 1)) ? '0 : rd_q + 1'b1;
      cnt_q <= cnt_q + (PTR_W+1)'(push_i) - (PTR_W+1)'(pop_i);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push_i) mem[wr_q] <= data_i;
  end

  a_no_overflow:  assert property (@(posedge clk_i) disable iff (!rst_ni) push_i |-> !full_o || pop_i);
  a_no_underflow: assert property (@(posedge clk_i) disable iff (!rst_ni) pop_i |-> !empty_o);

endmodule

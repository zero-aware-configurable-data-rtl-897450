// zc_channel: ZAC-DEST coded data channel of a rank of CHIPS x8 DRAM chips.
//
// A 64-byte cache line is split into one 64-bit word per chip. On the DRAM
// side each chip has its own encoder (zc_encoder, with its data table) and
// serializer, so the line leaves as CHIPS parallel bursts of 8 beats, each
// beat carrying 8 data lines, one DBI line and one index line per chip. On the
// controller side each chip's burst is deserialized and decoded against the
// controller's copy of that chip's table, and the rebuilt line is delivered.
//
// The pins between the two sides (the Pseudo Open Drain drivers and the
// board wires) are outside this module: tx_beat_o is what each chip drives,
// rx_beat_i what the controller samples. Connecting one to the other gives the
// whole link; a channel model can delay or observe it in between.
//
// Timing: a line is taken when line_valid_i && line_ready_o, with the access
// setting cfg_i. Its bursts start one cycle later and last BEATS cycles; the
// rebuilt line is on out_data_o while out_valid_o pulses, which it does from
// the second clock edge after the edge that samples the last beat. With the
// pins looped back and the channel idle, that is 10 clock edges after the
// accepting edge. A new line can be taken every BEATS cycles.
// The chip count and table size follow the paper's evaluated configuration;
// the handshake and timing are this design's.
module zc_channel
  import zc_pkg::*;
#(
  parameter int unsigned CHIPS   = 8,
  parameter int unsigned ENTRIES = 64
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  // from the DRAM banks
  input  logic                      line_valid_i,
  output logic                      line_ready_o,
  input  logic [CHIPS-1:0][W-1:0]   line_data_i,
  input  zc_cfg_t                   cfg_i,
  // chip pins
  output zc_beat_t [CHIPS-1:0]      tx_beat_o,
  input  zc_beat_t [CHIPS-1:0]      rx_beat_i,
  // to the memory controller
  output logic                      out_valid_o,
  output logic [CHIPS-1:0][W-1:0]   out_data_o,
  output kind_e [CHIPS-1:0]         tx_kind_o,   // coding chosen per chip, last word sent
  output kind_e [CHIPS-1:0]         rx_kind_o    // coding seen per chip, last word rebuilt
);
  logic [CHIPS-1:0] enc_ready, enc_valid, ser_ready, des_valid, dec_valid;
  zc_enc_word_t [CHIPS-1:0] enc_word, des_word;
  logic    accept;
  zc_cfg_t rx_cfg;
  logic    cfg_empty, cfg_full;

  // All chips serve the same access in lock step.
  assign line_ready_o = &enc_ready && !cfg_full;
  assign accept       = line_valid_i && line_ready_o;

  for (genvar c = 0; c < CHIPS; c++) begin : g_chip
    zc_encoder #(.ENTRIES(ENTRIES)) u_enc (
      .clk_i, .rst_ni, .cfg_i,
      .in_valid_i(accept), .in_ready_o(enc_ready[c]), .in_data_i(line_data_i[c]),
      .out_valid_o(enc_valid[c]), .out_ready_i(ser_ready[c]), .out_o(enc_word[c]),
      .kind_o(tx_kind_o[c])
    );

    zc_serializer u_ser (
      .clk_i, .rst_ni,
      .in_valid_i(enc_valid[c]), .in_ready_o(ser_ready[c]), .in_i(enc_word[c]),
      .beat_o(tx_beat_o[c])
    );

    zc_deserializer u_des (
      .clk_i, .rst_ni, .beat_i(rx_beat_i[c]),
      .out_valid_o(des_valid[c]), .out_o(des_word[c])
    );

    zc_decoder #(.ENTRIES(ENTRIES)) u_dec (
      .clk_i, .rst_ni, .cfg_i(rx_cfg),
      .in_valid_i(des_valid[c]), .in_i(des_word[c]),
      .out_valid_o(dec_valid[c]), .out_data_o(out_data_o[c]), .kind_o(rx_kind_o[c])
    );
  end

  // Settings of accesses in flight, popped when their bursts are rebuilt.
  zc_cfg_fifo #(.DEPTH(4)) u_cfg_q (
    .clk_i, .rst_ni,
    .push_i(accept), .data_i(cfg_i),
    .pop_i(des_valid[0]), .head_o(rx_cfg),
    .empty_o(cfg_empty), .full_o(cfg_full)
  );

  assign out_valid_o = dec_valid[0];

  a_lockstep: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (des_valid == '0) || (des_valid == '1));
  a_cfg_known: assert property (@(posedge clk_i) disable iff (!rst_ni)
    des_valid[0] |-> !cfg_empty);

endmodule

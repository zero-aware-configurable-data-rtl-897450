// zc_decoder: ZAC-DEST receiver of one chip, at the memory controller.
//
// Keeps its own copy of the chip's data table and rebuilds each word:
//   - flags 00 (data lines zero): the word is zero;
//   - is_addr: the data lines hold a one-hot index; the word is that entry
//     with the truncated bits cleared (the approximate value, MSET);
//   - is_diff: after undoing DBI, the data lines hold a difference; the word is
//     it xor the entry named by the index line, truncated bits cleared;
//   - neither flag, non-zero: after undoing DBI, the data lines hold the word.
// After a difference or raw word the rebuilt word is written into the next
// round-robin slot, exactly as the sender did, so both tables stay equal.
// cfg_i must be the setting the word was sent with; only its truncation
// choice is used. The result is registered: out_valid_o rises the cycle after
// in_valid_i. The decoding rules follow the paper's algorithm; the flags,
// round-robin slot choice and timing are this design's.
module zc_decoder
  import zc_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  localparam int unsigned IDX_W  = $clog2(ENTRIES)
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  zc_cfg_t      cfg_i,
  input  logic         in_valid_i,
  input  zc_enc_word_t in_i,
  output logic         out_valid_o,
  output logic [W-1:0] out_data_o,
  output kind_e        kind_o
);
  logic [W-1:0]     mem [ENTRIES];
  logic [IDX_W-1:0] wr_ptr_q;
  logic [W-1:0]     tmask, data, entry, word;
  logic [IDX_W-1:0] rd_idx;
  kind_e            kind;
  logic             wr_en;

  always_comb begin
    tmask = cfg_i.approx_en ? lsb_mask(cfg_i.trunc_sel) : '0;
    data  = apply_dbi(in_i.data, in_i.dbi);
    if (in_i.side.is_addr)      kind = KIND_SKIP;
    else if (in_i.side.is_diff) kind = KIND_DIFF;
    else if (data == '0)        kind = KIND_ZERO;
    else                        kind = KIND_RAW;
    // One-hot to binary; for a difference word the index line gives it.
    rd_idx = IDX_W'(in_i.side.idx);
    if (kind == KIND_SKIP) begin
      rd_idx = '0;
      for (int unsigned i = 0; i < ENTRIES; i++)
        if (data[i]) rd_idx = IDX_W'(i);
    end
    entry = mem[rd_idx] & ~tmask;
    case (kind)
      KIND_SKIP: word = entry;
      KIND_DIFF: word = entry ^ data;
      KIND_RAW:  word = data;
      default:   word = '0;
    endcase
    wr_en = in_valid_i && (kind == KIND_DIFF || kind == KIND_RAW);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_ptr_q    <= '0;
      out_valid_o <= 1'b0;
      out_data_o  <= '0;
      kind_o      <= KIND_ZERO;
    end else begin
      out_valid_o <= in_valid_i;
      if (in_valid_i) begin
        out_data_o <= word;
        kind_o     <= kind;
      end
      if (wr_en) wr_ptr_q <= (wr_ptr_q == IDX_W'(ENTRIES - 1)) ? '0 : wr_ptr_q + 1'b1;
    end
  end

  always_ff @(posedge clk_i) begin
    if (wr_en) mem[wr_ptr_q] <= word;
  end

  // A one-hot index must name exactly one entry.
  a_onehot: assert property (@(posedge clk_i) disable iff (!rst_ni)
    in_valid_i && in_i.side.is_addr |-> $onehot(data) && ((data >> ENTRIES) == '0));

endmodule

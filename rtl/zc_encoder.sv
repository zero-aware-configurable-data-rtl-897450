// zc_encoder: ZAC-DEST sender of one DRAM chip.
//
// Takes the chip's 64-bit word of an access and decides, in one combinational
// pass, how to send it:
//   1. truncation clears the selected LSBs (DCDT, the word actually sent);
//   2. if DCDT is all zero, zeros go out and nothing else happens;
//   3. the data table finds the most similar stored word (MSE);
//   4. if fewer bits than the similarity limit differ and none of the
//      tolerance-protected MSBs differs, the transfer is skipped: the data
//      lines carry the one-hot index of the MSE and the receiver reuses its
//      copy of the MSE (approximate);
//   5. else, if ones(DCDT) > ones(DCDT xor MSE) + ones(binary index), the
//      difference goes on the data lines and the binary index on the index
//      line (exact); otherwise DCDT goes out raw (exact);
//   6. Dynamic Bus Inversion is applied to what is on the data lines;
//   7. after a difference or raw word the table stores DCDT, so the table
//      only holds exact, distinct, non-zero words.
// Steps 1-7 follow the paper. When cfg_i.approx_en is 0 (an access that must
// stay exact) truncation and tolerance are off and the skip is taken only
// for an exact match, which loses nothing; that rule is this design's.
//
// Interface: valid/ready in, valid/ready out. A word is accepted when
// in_valid_i && in_ready_o; the table is updated on that clock edge and the
// coded word appears on out_o the next cycle, held until out_ready_i.
// Index-line word: {is_addr, is_diff, idx[5:0]} (zc_side_t), this design's
// layout of the paper's address/data flag and 6-bit index.
module zc_encoder
  import zc_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  localparam int unsigned IDX_W  = $clog2(ENTRIES)
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  zc_cfg_t      cfg_i,
  input  logic         in_valid_i,
  output logic         in_ready_o,
  input  logic [W-1:0] in_data_i,
  output logic         out_valid_o,
  input  logic         out_ready_i,
  output zc_enc_word_t out_o,
  output kind_e        kind_o      // how out_o was coded, for observation
);
  gran_e            trunc_sel, tol_sel;
  logic [W-1:0]     dcdt, tmask;
  logic             is_zero;
  logic             hit;
  logic [W-1:0]     xored, idx_ohe;
  logic [CNT_W-1:0] hdist, replica, sim_count;
  logic [IDX_W-1:0] idx_abe;
  logic             sim_ok, sim_ok_approx, tol_ok;
  logic             skip, diff, accept, wr_en;
  logic [W-1:0]     pre_dbi, post_dbi;
  logic [BEATS-1:0] dbi_flags;
  kind_e            kind;

  assign trunc_sel = cfg_i.approx_en ? cfg_i.trunc_sel : GRAN_NONE;
  assign tol_sel   = cfg_i.approx_en ? cfg_i.tol_sel   : GRAN_NONE;

  zc_truncation u_trunc (
    .data_i(in_data_i), .sel_i(trunc_sel), .data_o(dcdt), .mask_o(tmask)
  );

  zc_zero_checker u_zero (.data_i(dcdt), .zero_o(is_zero));

  zc_mbdc_table #(.ENTRIES(ENTRIES)) u_table (
    .clk_i, .rst_ni,
    .search_i(dcdt), .trunc_mask_i(tmask),
    .hit_o(hit), .mse_o(), .xored_o(xored), .dist_o(hdist),
    .idx_ohe_o(idx_ohe), .idx_abe_o(idx_abe), .replica_o(replica),
    .wr_en_i(wr_en), .wr_idx_o()
  );

  zc_similarity_checker u_sim (
    .xored_i(xored), .sel_i(cfg_i.sim_sel), .count_o(sim_count), .similar_o(sim_ok_approx)
  );

  zc_tolerance_checker u_tol (.xored_i(xored), .sel_i(tol_sel), .ok_o(tol_ok));

  always_comb begin
    sim_ok = cfg_i.approx_en ? sim_ok_approx : (sim_count == '0);
    skip   = !is_zero && hit && sim_ok && tol_ok;
    diff   = !is_zero && !skip && hit &&
             ({1'b0, replica} > ({1'b0, hdist} + {1'b0, popcount64(W'(idx_abe))}));
    if (is_zero)   kind = KIND_ZERO;
    else if (skip) kind = KIND_SKIP;
    else if (diff) kind = KIND_DIFF;
    else           kind = KIND_RAW;
    case (kind)
      KIND_ZERO: pre_dbi = '0;
      KIND_SKIP: pre_dbi = idx_ohe;
      KIND_DIFF: pre_dbi = xored;
      default:   pre_dbi = dcdt;
    endcase
  end

  zc_dbi u_dbi (.data_i(pre_dbi), .data_o(post_dbi), .flag_o(dbi_flags));

  assign in_ready_o = !out_valid_o || out_ready_i;
  assign accept     = in_valid_i && in_ready_o;
  assign wr_en      = accept && (kind == KIND_DIFF || kind == KIND_RAW);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      out_valid_o <= 1'b0;
      out_o       <= '0;
      kind_o      <= KIND_ZERO;
    end else if (in_ready_o) begin
      out_valid_o <= in_valid_i;
      if (in_valid_i) begin
        out_o.data         <= post_dbi;
        out_o.dbi          <= dbi_flags;
        out_o.side.is_addr <= (kind == KIND_SKIP);
        out_o.side.is_diff <= (kind == KIND_DIFF);
        out_o.side.idx     <= (kind == KIND_DIFF) ? 6'(idx_abe) : '0;
        kind_o             <= kind;
      end
    end
  end

  // A held word must not change until it is taken.
  property p_hold;
    @(posedge clk_i) disable iff (!rst_ni)
      out_valid_o && !out_ready_i |=> out_valid_o && $stable(out_o);
  endproperty
  a_hold: assert property (p_hold);

endmodule

// zc_mbdc_table: sender data table of the modified bitwise difference coder.
//
// Holds up to ENTRIES recent 64-bit words, each with a valid bit. Every cycle
// it compares the search word with every valid entry, bit positions marked in
// trunc_mask_i excluded (the truncation line that disconnects a CAM cell's
// comparator), and returns the entry with the fewest differing bits: its
// one-hot index (idx_ohe_o, bit i for entry i), its binary index (idx_abe_o),
// the entry with truncated bits cleared (mse_o), the bitwise difference
// (xored_o) and its count (dist_o). replica_o counts the ones of the search
// word itself, the job of the replica row. Ties go to the lowest index.
//
// The paper builds the table as a NOR CAM with a current-race search circuit;
// here the same function is written as a register array, a population count
// per row and a minimum search, all combinational from search_i to the
// outputs. wr_en_i writes the search word on the rising clock edge into slot
// wr_idx_o, which advances round-robin so the oldest word is replaced (the
// paper only says the table holds recent words). Reset empties the table.
module zc_mbdc_table
  import zc_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  localparam int unsigned IDX_W  = $clog2(ENTRIES)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [W-1:0]     search_i,
  input  logic [W-1:0]     trunc_mask_i,
  output logic             hit_o,
  output logic [W-1:0]     mse_o,
  output logic [W-1:0]     xored_o,
  output logic [CNT_W-1:0] dist_o,
  output logic [W-1:0]     idx_ohe_o,
  output logic [IDX_W-1:0] idx_abe_o,
  output logic [CNT_W-1:0] replica_o,
  input  logic             wr_en_i,
  output logic [IDX_W-1:0] wr_idx_o
);
  // The one-hot index travels on the 64 data lines.
  if (ENTRIES > W || ENTRIES < 2) begin : g_bad_size
    $error("ENTRIES must be between 2 and the data width");
  end

  logic [W-1:0]     mem   [ENTRIES];
  logic [ENTRIES-1:0] valid_q;
  logic [IDX_W-1:0] wr_ptr_q;

  logic [CNT_W-1:0] hdist [ENTRIES];
  logic [IDX_W-1:0] best;
  logic [CNT_W-1:0] best_dist;

  // One difference counter per row (the comparison line of each CAM word).
  for (genvar i = 0; i < ENTRIES; i++) begin : g_row
    always_comb hdist[i] = popcount64((mem[i] ^ search_i) & ~trunc_mask_i);
  end

  always_comb begin
    hit_o     = |valid_q;
    best      = '0;
    best_dist = CNT_W'(W) + CNT_W'(1);  // above any real distance
    for (int unsigned i = 0; i < ENTRIES; i++)
      if (valid_q[i] && hdist[i] < best_dist) begin
        best      = IDX_W'(i);
        best_dist = hdist[i];
      end
    idx_abe_o = best;
    idx_ohe_o = '0;
    idx_ohe_o[best] = hit_o;
    mse_o     = hit_o ? (mem[best] & ~trunc_mask_i) : '0;
    xored_o   = mse_o ^ search_i;
    dist_o    = popcount64(xored_o);
    replica_o = popcount64(search_i & ~trunc_mask_i);
  end

  assign wr_idx_o = wr_ptr_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q  <= '0;
      wr_ptr_q <= '0;
    end else if (wr_en_i) begin
      valid_q[wr_ptr_q] <= 1'b1;
      wr_ptr_q <= (wr_ptr_q == IDX_W'(ENTRIES - 1)) ? '0 : wr_ptr_q + 1'b1;
    end
  end

  // Storage is not reset: the valid bits keep unwritten words out of the search.
  always_ff @(posedge clk_i) begin
    if (wr_en_i) mem[wr_ptr_q] <= search_i;
  end

endmodule

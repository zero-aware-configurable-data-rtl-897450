// tb_zc_mbdc_table: checks the sender data table. Fills it past its size so
// the round-robin replacement wraps, and after every write searches it with
// random words and truncation masks, comparing most similar entry, indices,
// difference, count and replica count with a brute-force search of a copy
// of the table kept here (lowest index wins a tie). An empty table must
// report no hit.
module tb_zc_mbdc_table;
  import zc_pkg::*;
  import tb_zc_ref_pkg::*;
  localparam int N = 64;

  logic clk = 0, rst_n = 0;
  logic [63:0] search, tmask, mse, xored, ohe;
  logic [6:0]  hd, rep;
  logic [5:0]  abe, wr_idx;
  logic        hit, wr_en;
  int checks = 0, failures = 0;

  logic [63:0] model [N];
  bit          mv [N];
  int          mptr = 0;

  zc_mbdc_table #(.ENTRIES(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .search_i(search), .trunc_mask_i(tmask),
    .hit_o(hit), .mse_o(mse), .xored_o(xored), .dist_o(hd), .idx_ohe_o(ohe),
    .idx_abe_o(abe), .replica_o(rep), .wr_en_i(wr_en), .wr_idx_o(wr_idx)
  );

  always #5 clk = ~clk;

  task automatic search_check(logic [63:0] w, gran_e g);
    int best = 0, bd = 1000, d;
    bit any = 0;
    logic [63:0] m, ms;
    m = ref_low_mask(g);
    search = w & ~m; tmask = m;
    #1;
    for (int i = 0; i < N; i++)
      if (mv[i]) begin
        any = 1;
        d = $countones((model[i] ^ search) & ~m);
        if (d < bd) begin bd = d; best = i; end
      end
    ms = any ? (model[best] & ~m) : '0;
    checks++;
    if (hit !== any || rep !== 7'($countones(search)) ||
        (any && (abe !== 6'(best) || ohe !== (64'd1 << best) || mse !== ms ||
                 xored !== (ms ^ search) || hd !== 7'(bd)))) begin
      failures++;
      $display("FAIL table hit=%b/%b abe=%0d/%0d hd=%0d/%0d", hit, any, abe, best, hd, bd);
    end
  endtask

  initial begin
    automatic tb_zc_ref_pkg::zc_stim st = new();
    logic [63:0] w;
    wr_en = 0; search = '0; tmask = '0;
    foreach (mv[i]) mv[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    search_check(64'h1234, GRAN_NONE);  // empty table
    @(negedge clk);
    for (int n = 0; n < 3 * N; n++) begin
      for (int s = 0; s < 4; s++) search_check(st.next(), gran_e'($urandom % 9));
      // write a new word
      w = st.next();
      search = w; tmask = '0; wr_en = 1;
      checks++;
      if (wr_idx !== 6'(mptr)) begin failures++; $display("FAIL wr_idx"); end
      @(posedge clk);
      #1;
      model[mptr] = w; mv[mptr] = 1; mptr = (mptr + 1) % N;
      wr_en = 0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_zc_channel: end-to-end test of the whole channel at its default size
// (8 chips, 64-entry tables). The chip pins are looped straight back to the
// controller side. Cache lines come from per-chip word streams with zeros,
// repeats and near repeats; every access gets random settings, and the line
// source pauses at random. Each rebuilt line is compared, chip by chip, with
// the value a reference sender model says the controller must receive, and
// its latency (out_valid high 10 cycles after the accepting clock edge) and the back-to-back rate (one line
// per 8 cycles) are checked. Counts how often each mechanism happened and
// fails any that never did: zero word, skipped transfer (one-hot index),
// difference word, raw word, DBI inversion, truncation changing a word,
// tolerance blocking a skip, exact-only access, table wrap-around, input stall.
// Prints the ones sent on the data and index lines against an uncoded bus.
module tb_zc_channel;
  import zc_pkg::*;
  import tb_zc_ref_pkg::*;
  localparam int CH = 8;
  localparam int LINES = 3000;

  logic clk = 0, rst_n = 0;
  logic line_valid, line_ready, out_valid;
  logic [CH-1:0][63:0] line_data, out_data;
  zc_cfg_t cfg;
  zc_beat_t [CH-1:0] tx, rx;
  kind_e [CH-1:0] tx_kind, rx_kind;
  int checks = 0, failures = 0;

  zc_channel dut (
    .clk_i(clk), .rst_ni(rst_n),
    .line_valid_i(line_valid), .line_ready_o(line_ready), .line_data_i(line_data), .cfg_i(cfg),
    .tx_beat_o(tx), .rx_beat_i(rx),
    .out_valid_o(out_valid), .out_data_o(out_data), .tx_kind_o(tx_kind), .rx_kind_o(rx_kind)
  );

  assign rx = tx;  // the board wires
  always #5 clk = ~clk;

  tb_zc_ref_pkg::zc_ref_coder m [CH];
  tb_zc_ref_pkg::zc_stim      st [CH];
  logic [CH-1:0][63:0] exp_q [$];
  int   acc_cyc_q [$];
  int   cyc = 0, got = 0;
  // mechanism counters
  int n_kind [4];
  int n_idle = 0, n_dbi = 0, n_trunc = 0, n_tolblk = 0, n_exact = 0, n_wrap = 0, n_stall = 0;
  longint ones_coded = 0, ones_plain = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int c = 0; c < CH; c++)
      if (tx[c].strobe) begin
        ones_coded += $countones(tx[c].dq) + tx[c].dbi + tx[c].idx;
        if (tx[c].dbi) n_dbi++;
      end
    if (line_valid && !line_ready) n_stall++;
    if (out_valid) begin
      logic [CH-1:0][63:0] e;
      int a;
      got++;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL extra line"); end
      else begin
        e = exp_q.pop_front();
        a = acc_cyc_q.pop_front();
        for (int c = 0; c < CH; c++)
          if (out_data[c] !== e[c]) begin
            failures++;
            $display("FAIL line %0d chip %0d got %h exp %h", got, c, out_data[c], e[c]);
            break;
          end
        checks++;
        // a < 0 marks a line accepted into an empty channel: valid is seen 11 edges after the accepting edge;
        // a line that waited behind a burst may take up to 19.
        if (a < 0 ? (cyc + a != 11) : (cyc - a > 19)) begin
          failures++; $display("FAIL latency %0d", a < 0 ? cyc + a : cyc - a);
        end
        for (int c = 0; c < CH; c++) n_kind[rx_kind[c]]++;
      end
    end
  end

  task automatic offer(bit v);
    zc_enc_word_t ew;
    kind_e k;
    logic [CH-1:0][63:0] dr;
    @(negedge clk);
    line_valid = v;
    cfg = rand_cfg();
    for (int c = 0; c < CH; c++) line_data[c] = st[c].next();
    #1;
    if (line_valid && line_ready) begin
      for (int c = 0; c < CH; c++) begin
        int w0 = m[c].writes;
        m[c].encode(cfg, line_data[c], ew, k, dr[c]);
        ones_plain += $countones(line_data[c]);
        if (cfg.approx_en && (line_data[c] & ref_low_mask(cfg.trunc_sel)) != 0) n_trunc++;
        if (m[c].tol_block) n_tolblk++;
        if (m[c].writes > 64 && w0 <= 64) n_wrap++;
      end
      if (!cfg.approx_en) n_exact++;
      acc_cyc_q.push_back(exp_q.size() == 0 && !dut.enc_valid[0] && !tx[0].strobe ? -(cyc + 1) : cyc + 1);
      exp_q.push_back(dr);
      if (acc_cyc_q[$] < 0) n_idle++;
    end
  endtask

  initial begin
    int t0;
    for (int c = 0; c < CH; c++) begin m[c] = new(64); st[c] = new(); end
    line_valid = 0; line_data = '0; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Full rate: 40 lines offered every cycle must take 320 cycles.
    t0 = cyc;
    while (exp_q.size() + got < 40) offer(1);
    @(negedge clk); line_valid = 0;
    while (exp_q.size() != 0) @(negedge clk);
    checks++;
    if (cyc - t0 > 40 * 8 + 12 || cyc - t0 < 40 * 8) begin
      failures++; $display("FAIL rate: 40 lines in %0d cycles", cyc - t0);
    end
    // Random traffic.
    while (exp_q.size() + got < LINES) offer(($urandom % 4) != 0);
    @(negedge clk); line_valid = 0;
    repeat (30) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL lines lost"); end
    $display("lines=%0d zero=%0d raw=%0d diff=%0d skip=%0d dbi_beats=%0d trunc=%0d tol_block=%0d exact_access=%0d wraps=%0d stalls=%0d idle_starts=%0d",
             got, n_kind[KIND_ZERO], n_kind[KIND_RAW], n_kind[KIND_DIFF], n_kind[KIND_SKIP],
             n_dbi, n_trunc, n_tolblk, n_exact, n_wrap, n_stall, n_idle);
    $display("ones on the pins: coded=%0d uncoded=%0d", ones_coded, ones_plain);
    foreach (n_kind[i]) begin checks++; if (n_kind[i] == 0) failures++; end
    checks++; if (n_dbi == 0)    failures++;
    checks++; if (n_trunc == 0)  failures++;
    checks++; if (n_tolblk == 0) failures++;
    checks++; if (n_exact == 0)  failures++;
    checks++; if (n_wrap != CH)  failures++;
    checks++; if (n_stall == 0)  failures++;
    checks++; if (n_idle == 0)   failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

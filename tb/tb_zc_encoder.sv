// tb_zc_encoder: drives one chip's encoder with a word stream that has zeros,
// repeats and near repeats, random settings per access and random back
// pressure on the output, and compares every coded word (data lines, DBI
// flags, index-line word and kind) with the reference model. Also checks the
// one-cycle latency, that a held output does not change, and that each of the
// four codings occurred.
module tb_zc_encoder;
  import zc_pkg::*;
  import tb_zc_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  zc_cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [63:0] in_data;
  zc_enc_word_t out_w;
  kind_e kind;
  int checks = 0, failures = 0;
  int kinds [4];

  zc_encoder #(.ENTRIES(64)) dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_o(out_w), .kind_o(kind)
  );

  always #5 clk = ~clk;

  zc_enc_word_t exp_q[$];
  kind_e        expk_q[$];

  // Scoreboard: compare each word as it leaves.
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    zc_enc_word_t e;
    kind_e k;
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL unexpected output");
    end else begin
      e = exp_q.pop_front(); k = expk_q.pop_front();
      if (out_w !== e || kind !== k) begin
        failures++;
        $display("FAIL enc got %h/%b/%h kind %0d exp %h/%b/%h kind %0d",
                 out_w.data, out_w.dbi, out_w.side, kind, e.data, e.dbi, e.side, k);
      end
      kinds[k]++;
    end
  end

  initial begin
    automatic tb_zc_ref_pkg::zc_ref_coder m = new(64);
    automatic tb_zc_ref_pkg::zc_stim st = new();
    zc_enc_word_t e;
    kind_e k;
    logic [63:0] dr;
    in_valid = 0; out_ready = 1; in_data = '0; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Latency: accepted word is visible the next cycle.
    @(negedge clk);
    in_valid = 1; in_data = 64'h00FF_0000_0000_1234; cfg = rand_cfg();
    m.encode(cfg, in_data, e, k, dr);
    exp_q.push_back(e); expk_q.push_back(k);
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid) begin failures++; $display("FAIL latency"); end
    @(negedge clk);
    for (int n = 0; n < 4000; n++) begin
      out_ready = ($urandom % 4) != 0;
      in_valid  = ($urandom % 5) != 0;
      in_data   = st.next();
      cfg       = rand_cfg();
      #1;
      if (in_valid && in_ready) begin
        m.encode(cfg, in_data, e, k, dr);
        exp_q.push_back(e); expk_q.push_back(k);
      end
      @(negedge clk);
    end
    in_valid = 0; out_ready = 1;
    repeat (3) @(negedge clk);
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (kinds[i] == 0) begin failures++; $display("FAIL kind %0d never seen", i); end
    end
    $display("encoder: zero=%0d raw=%0d diff=%0d skip=%0d", kinds[0], kinds[1], kinds[2], kinds[3]);
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

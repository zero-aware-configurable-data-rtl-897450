// tb_zc_decoder: feeds the receiver with coded words produced by the
// reference sender model (random settings, a stream with zeros, repeats and
// near repeats) and checks each rebuilt word against the value the sender
// model says the receiver must get, one cycle after the word goes in. Every
// coding must occur; table slots are reused many times over.
module tb_zc_decoder;
  import zc_pkg::*;
  import tb_zc_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  zc_cfg_t cfg;
  logic in_valid, out_valid;
  zc_enc_word_t in_w;
  logic [63:0] out_d;
  kind_e kind;
  int checks = 0, failures = 0;
  int kinds [4];

  zc_decoder #(.ENTRIES(64)) dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .in_valid_i(in_valid), .in_i(in_w),
    .out_valid_o(out_valid), .out_data_o(out_d), .kind_o(kind)
  );

  always #5 clk = ~clk;

  initial begin
    automatic tb_zc_ref_pkg::zc_ref_coder m = new(64);
    automatic tb_zc_ref_pkg::zc_stim st = new();
    zc_enc_word_t e;
    kind_e k;
    logic [63:0] dr;
    in_valid = 0; in_w = '0; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      cfg = rand_cfg();
      m.encode(cfg, st.next(), e, k, dr);
      in_valid = 1; in_w = e;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_d !== dr || kind !== k) begin
        failures++;
        $display("FAIL dec n=%0d kind %0d/%0d got %h exp %h", n, kind, k, out_d, dr);
      end
      kinds[k]++;
    end
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (kinds[i] == 0) begin failures++; $display("FAIL kind %0d never seen", i); end
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

// tb_zc_deserializer: drives bursts of 8 beats (byte b on beat b), with and
// without idle cycles between them, and checks that each rebuilt word appears
// with a one-cycle valid pulse the cycle after its last beat.
module tb_zc_deserializer;
  import zc_pkg::*;
  logic clk = 0, rst_n = 0;
  zc_beat_t beat;
  logic out_valid;
  zc_enc_word_t out_w;
  int checks = 0, failures = 0, got = 0;

  zc_deserializer dut (.clk_i(clk), .rst_ni(rst_n), .beat_i(beat),
                       .out_valid_o(out_valid), .out_o(out_w));

  always #5 clk = ~clk;

  task automatic send(zc_enc_word_t w, int gap);
    logic [7:0] side = w.side;
    for (int b = 0; b < 8; b++) begin
      @(negedge clk);
      beat.strobe = 1; beat.dq = w.data[b*8 +: 8]; beat.dbi = w.dbi[b]; beat.idx = side[b];
      checks++;
      if (out_valid && b != 0) begin failures++; $display("FAIL early valid"); end
    end
    @(negedge clk);
    beat = '0;
    checks++;
    if (!out_valid || out_w !== w) begin
      failures++; $display("FAIL word %h got %h valid %b", w, out_w, out_valid);
    end
    repeat (gap) begin
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL valid not a pulse"); end
    end
  endtask

  initial begin
    beat = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      automatic zc_enc_word_t w = zc_enc_word_t'({$urandom, $urandom, $urandom[15:0]});
      send(w, $urandom % 3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_zc_serializer: sends random coded words with random gaps and checks each
// burst beat by beat: strobe on 8 consecutive cycles starting one cycle after
// acceptance, byte b, DBI flag b and index-line bit b on beat b, and no gap
// between back-to-back bursts (one word per 8 cycles at full rate).
module tb_zc_serializer;
  import zc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready;
  zc_enc_word_t in_w;
  zc_beat_t beat;
  int checks = 0, failures = 0;
  zc_enc_word_t q[$];
  int beat_no = 0, bursts = 0, cyc = 0, first_cyc = -1, last_cyc = 0;

  zc_serializer dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid),
                     .in_ready_o(in_ready), .in_i(in_w), .beat_o(beat));

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (beat.strobe) begin
      zc_enc_word_t e;
      logic [7:0] side;
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL beat with no word"); end
      else begin
        e = q[0];
        side = e.side;
        if (beat.dq !== e.data[beat_no*8 +: 8] || beat.dbi !== e.dbi[beat_no] || beat.idx !== side[beat_no]) begin
          failures++;
          $display("FAIL beat %0d: %h %b %b", beat_no, beat.dq, beat.dbi, beat.idx);
        end
      end
      if (first_cyc < 0) first_cyc = cyc;
      last_cyc = cyc;
      beat_no++;
      if (beat_no == 8) begin beat_no = 0; void'(q.pop_front()); bursts++; end
    end else if (beat_no != 0) begin
      failures++; $display("FAIL gap inside a burst");
    end
  end

  initial begin
    in_valid = 0; in_w = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 10 words back to back: 80 beats in 80 cycles.
    for (int n = 0; n < 10; n++) begin
      @(negedge clk);
      in_valid = 1; in_w = zc_enc_word_t'({$urandom, $urandom, $urandom[15:0]});
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(posedge clk);
      q.push_back(in_w);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (bursts != 10 || last_cyc - first_cyc != 79) begin
      failures++; $display("FAIL rate: %0d bursts over %0d cycles", bursts, last_cyc - first_cyc + 1);
    end
    // Random gaps.
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      in_valid = ($urandom % 3) == 0; in_w = zc_enc_word_t'({$urandom, $urandom, $urandom[15:0]});
      #1;
      if (in_valid && in_ready) q.push_back(in_w);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL words not sent"); end
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

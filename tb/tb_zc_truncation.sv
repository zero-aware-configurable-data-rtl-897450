// tb_zc_truncation: checks LSB truncation for all nine settings on random
// words, and the masks of the paper's two drawn examples (truncation of 16 bits
// with 8-bit and 16-bit chunks).
module tb_zc_truncation;
  import zc_pkg::*;
  import tb_zc_ref_pkg::*;
  logic [63:0] d, q, m;
  gran_e       sel;
  int checks = 0, failures = 0;

  zc_truncation dut (.data_i(d), .sel_i(sel), .data_o(q), .mask_o(m));

  task automatic check(gran_e g, logic [63:0] v, logic [63:0] exp_m);
    d = v; sel = g;
    #1;
    checks++;
    if (m !== exp_m || q !== (v & ~exp_m)) begin
      failures++;
      $display("FAIL truncation sel=%0d d=%h q=%h m=%h exp_m=%h", g, v, q, m, exp_m);
    end
  endtask

  initial begin
    check(GRAN_8_2,  '1, 64'h0303_0303_0303_0303);
    check(GRAN_16_4, '1, 64'h000F_000F_000F_000F);
    check(GRAN_64_16, '1, 64'h0000_0000_0000_FFFF);
    check(GRAN_NONE, '1, 64'h0);
    for (int i = 0; i < 900; i++) begin
      automatic gran_e g = gran_e'(i % 9);
      check(g, {$urandom, $urandom}, ref_low_mask(g));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

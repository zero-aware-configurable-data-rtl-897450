// tb_zc_tolerance_checker: checks the protected-MSB test for all nine settings:
// the drawn masks (tolerance 16 with 8- and 16-bit chunks), one differing
// bit at each position, and random differences.
module tb_zc_tolerance_checker;
  import zc_pkg::*;
  import tb_zc_ref_pkg::*;
  logic [63:0] x;
  gran_e       sel;
  logic        ok;
  int checks = 0, failures = 0;

  zc_tolerance_checker dut (.xored_i(x), .sel_i(sel), .ok_o(ok));

  task automatic check(gran_e g, logic [63:0] v, logic [63:0] hm);
    x = v; sel = g;
    #1;
    checks++;
    if (ok !== ((v & hm) == 0)) begin
      failures++;
      $display("FAIL tolerance sel=%0d x=%h ok=%b", g, v, ok);
    end
  endtask

  initial begin
    // Drawn examples: bits that must stay exact.
    for (int i = 0; i < 64; i++) begin
      check(GRAN_8_2,  64'd1 << i, 64'hC0C0_C0C0_C0C0_C0C0);
      check(GRAN_16_4, 64'd1 << i, 64'hF000_F000_F000_F000);
    end
    for (int i = 0; i < 64 * 9; i++) begin
      automatic gran_e g = gran_e'(i % 9);
      check(g, 64'd1 << (i / 9), ref_high_mask(g));
    end
    for (int i = 0; i < 900; i++) begin
      automatic gran_e g = gran_e'(i % 9);
      check(g, {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom}, ref_high_mask(g));
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

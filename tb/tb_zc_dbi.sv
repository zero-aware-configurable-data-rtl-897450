// tb_zc_dbi: checks bus inversion byte by byte: every byte value 0..255 in
// every lane, and random words; no output byte may hold more than four ones.
module tb_zc_dbi;
  import tb_zc_ref_pkg::*;
  logic [63:0] d, q, eq;
  logic [7:0]  f, ef;
  int checks = 0, failures = 0;

  zc_dbi dut (.data_i(d), .data_o(q), .flag_o(f));

  task automatic check(logic [63:0] v);
    d = v;
    #1;
    ref_dbi(v, eq, ef);
    checks++;
    if (q !== eq || f !== ef) begin
      failures++;
      $display("FAIL dbi d=%h q=%h f=%b", v, q, f);
    end
    for (int b = 0; b < 8; b++) begin
      checks++;
      if ($countones(q[b*8 +: 8]) > 4) failures++;
    end
  endtask

  initial begin
    for (int v = 0; v < 256; v++) check({8{8'(v)}});
    for (int i = 0; i < 1000; i++) check({$urandom, $urandom});
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

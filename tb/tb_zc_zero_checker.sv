// tb_zc_zero_checker: checks the all-zero detector on zero, single-bit and
// random words against an independent comparison with zero.
module tb_zc_zero_checker;
  logic [63:0] d;
  logic        z;
  int checks = 0, failures = 0;

  zc_zero_checker dut (.data_i(d), .zero_o(z));

  task automatic check(logic [63:0] v);
    d = v;
    #1;
    checks++;
    if (z !== (v == 64'd0)) begin
      failures++;
      $display("FAIL zero_checker %h -> %b", v, z);
    end
  endtask

  initial begin
    check('0);
    for (int i = 0; i < 64; i++) check(64'd1 << i);
    for (int i = 0; i < 500; i++) check({$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom});
    check('1);
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

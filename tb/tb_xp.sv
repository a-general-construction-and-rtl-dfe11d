// tb_xp: exhaustive check of the XOR-or-PASS unit against the 2x2 kernel
// F = [1 0; 1 1]: (a, b) -> (a xor b, b).
module tb_xp;
  logic a, b, ao, bo;
  int checks = 0, failures = 0;

  xp u_dut (.a_i(a), .b_i(b), .a_o(ao), .b_o(bo));

  initial begin : watchdog
    #1000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++) begin
      {a, b} = 2'(v);
      #1;
      checks += 2;
      if (ao !== (v == 1 || v == 2)) failures++;   // upper: one of the two is set
      if (bo !== v[0]) failures++;                 // lower: b itself
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

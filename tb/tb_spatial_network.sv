// tb_spatial_network: the in-cycle network at L=32 must give the length-32 polar
// transform of its input block in bit-reversed lane order. The reference applies the
// butterflies x[j] ^= x[j+s] (j without bit s) for s = 1, 2, ..., 16.
module tb_spatial_network;
  localparam int unsigned L = 32;
  logic [L-1:0] u, v;
  int checks = 0, failures = 0;

  spatial_network #(.L(L)) u_dut (.u_i(u), .v_o(v));

  function automatic int unsigned brev(int unsigned x, int unsigned bits);
    int unsigned r = 0;
    for (int unsigned i = 0; i < bits; i++) r = (r << 1) | ((x >> i) & 1);
    return r;
  endfunction

  initial begin : watchdog
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      logic [L-1:0] x;
      u = (t < L) ? (L'(1) << t) : L'($urandom);
      x = u;
      for (int unsigned s = 1; s < L; s *= 2)
        for (int unsigned j = 0; j < L; j++)
          if ((j & s) == 0) x[j] = x[j] ^ x[j+s];
      #1;
      for (int unsigned p = 0; p < L; p++) begin
        checks++;
        if (v[p] !== x[brev(p, $clog2(L))]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

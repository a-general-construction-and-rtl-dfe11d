// tb_spatial_stage: random check of one XP column plus P_K permutation.
// Two instances: L=8 with K=8 (the P_8 of the architecture drawing) and L=8 with
// K=4 (two copies of P_4). The reference scatters every lane j of the XP column to
// group position (j%K)/2 + (j%2)*K/2, the inverse view of the gather in the design.
module tb_spatial_stage;
  localparam int unsigned L = 8;
  logic [L-1:0] d, o8, o4;
  int checks = 0, failures = 0;

  spatial_stage #(.L(L), .K(8)) u_k8 (.d_i(d), .d_o(o8));
  spatial_stage #(.L(L), .K(4)) u_k4 (.d_i(d), .d_o(o4));

  function automatic logic [L-1:0] ref_stage(logic [L-1:0] in, int unsigned K);
    logic [L-1:0] x, r;
    for (int unsigned j = 0; j < L; j++) x[j] = (j % 2 == 0) ? in[j] ^ in[j+1] : in[j];
    for (int unsigned j = 0; j < L; j++) r[(j / K) * K + (j % K) / 2 + (j % 2) * (K / 2)] = x[j];
    return r;
  endfunction

  initial begin : watchdog
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    // single-bit inputs show the routing of P_8: XP lanes 0,1 -> 0,4; lane 2 -> 1
    d = 8'b0000_0010; #1;
    checks++; if (o8 !== 8'b0001_0001) failures++;
    d = 8'b0000_0100; #1;
    checks++; if (o8 !== 8'b0000_0010) failures++;
    for (int unsigned v = 0; v < 256; v++) begin
      d = 8'(v);
      #1;
      checks += 2;
      if (o8 !== ref_stage(d, 8)) failures++;
      if (o4 !== ref_stage(d, 4)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

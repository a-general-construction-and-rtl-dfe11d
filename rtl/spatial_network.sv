// spatial_network: the in-cycle part of the folded polar encoder.
//
// log2(L) spatial stages with permutation sizes K = L, L/2, ..., 2 (the first
// product of the architecture equation). It applies F^{(x)log2 L} to one L-bit block
// in a single cycle. The result leaves the network in bit-reversed lane order:
// output lane p carries code-bit bitrev(p) of the block transform. Combinational.
module spatial_network #(
  parameter int unsigned L = 32
) (
  input  logic [L-1:0] u_i,  // source block, lane l = source bit l of the block
  output logic [L-1:0] v_o   // v_o[p] = (u_i * F^{(x)log2 L})[bitrev(p)]
);
  localparam int unsigned S = $clog2(L);
  logic [L-1:0] w [S+1];

  assign w[0] = u_i;
  for (genvar i = 0; i < S; i++) begin : g_stage
    spatial_stage #(.L(L), .K(L >> i)) u_stage (.d_i(w[i]), .d_o(w[i+1]));
  end
  assign v_o = w[S];
endmodule

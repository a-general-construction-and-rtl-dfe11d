// spatial_stage: one factor XP^{(x)L/2} . P_K^{(x)L/K} of the folded encoder.
//
// A column of L/2 XOR-or-PASS units on the lane pairs (0,1), (2,3), ... is followed
// by the stride permutation P_K applied to every group of K lanes. P_K sends the
// even-numbered lanes of a group to its upper half and the odd-numbered lanes to its
// lower half, in order:  out[g*K + q] = in[g*K + 2q] for q < K/2, and
// out[g*K + q] = in[g*K + 2(q-K/2) + 1] otherwise. With K = 2 the permutation is the
// identity. Combinational; lane 0 is bit 0 of the vectors.
//
// The XOR column and P_K follow the architecture drawings; the exact wiring of P_K
// is the one that makes the next XOR column pair lanes whose indices differ in the
// next-higher bit, and it matches the top and bottom lines running straight through
// in the drawn P_8.
module spatial_stage #(
  parameter int unsigned L = 32,  // lanes (parallelism)
  parameter int unsigned K = 32   // permutation size, a power of two dividing L
) (
  input  logic [L-1:0] d_i,
  output logic [L-1:0] d_o
);
  logic [L-1:0] x;  // after the XP column

  for (genvar p = 0; p < L; p += 2) begin : g_xp
    xp u_xp (.a_i(d_i[p]), .b_i(d_i[p+1]), .a_o(x[p]), .b_o(x[p+1]));
  end

  for (genvar g = 0; g < L; g += K) begin : g_grp
    for (genvar q = 0; q < K; q++) begin : g_lane
      if (q < K / 2) begin : g_even
        assign d_o[g+q] = x[g+2*q];
      end else begin : g_odd
        assign d_o[g+q] = x[g+2*(q-K/2)+1];
      end
    end
  end
endmodule

// pruned_folded_encoder: L-parallel folded polar encoder with zero-block pruning.
//
// Computes the polar code word x = u * F^{(x)n} (n = log2 N, F = [1 0; 1 1], no bit
// reversal) of every N-bit source frame u, L bits per cycle. The first C source bits
// of a frame are frozen zeros, so the first Z = floor(C/L) blocks are never fed: a
// frame takes P = ceil((N-C)/L) = N/L - Z accepted cycles, back to back, and the
// throughput is N/P bits per cycle. With C < L nothing is skipped and the unit is the
// plain folded ("auto") encoder with P = N/L.
//
// Datapath. Each accepted block passes the spatial network (log2 L columns of XP
// units with the P_K permutations), which applies F^{(x)log2 L} within the block. The
// L lanes then form L/2 chains of two; each chain runs through log2(N/L) stages of an
// S_K commutator (K = 2, 4, ..., N/L) followed by an XP unit, which combine blocks 1,
// 2, 4, ... cycles apart. The pruned blocks are handled by letting the commutators
// take Z extra steps with zero input in the cycle of the first fed block: the delay
// lines then hold exactly what they would hold had the zero blocks been fed, and the
// Z output blocks those steps produce leave in parallel on out_ext_x_o.
//
// Interface. in_blk_i[l] is source bit b*L + l of the frame, b = Z + (accepted
// count within the frame); in_sof_o marks the first fed block (b = Z). The bits of
// that block below C are forced to zero. out_x_o is valid with out_valid_o and holds
// output block k = out_blk_o; out_ext_x_o[e] holds block e+1 of the previous frame
// when out_ext_valid_o is high. In block k, lane p carries code bit
// (p%2)*N/2 + k*L/2 + bitrev_{log2(L)-1}(p/2). Block 0 of a frame appears in the
// cycle its last block is accepted (latency P, as a frame's first output needs its
// last input); the other blocks appear during the next frame, so the last frame of a
// burst is emptied by feeding one more frame. Outputs are combinational from the
// input and the registers; nothing moves while in_valid_i is low.
//
// The XP/P_K/S_K structure, the skipped input blocks, the latency and the merged
// output cycle follow the paper's architecture; the multi-step commutators, the
// output order and the place of the merged cycle are this design's own way of
// building the pruning for any N, L and C. The long combinational path through Z+1
// chained steps is inherent in doing Z+1 steps in one cycle.
module pruned_folded_encoder
  import polar_pkg::*;
#(
  parameter int unsigned N = 1024,  // code length before puncturing
  parameter int unsigned L = 32,    // parallelism
  parameter int unsigned C = 342,   // leading frozen bits
  localparam int unsigned B  = N / L,
  localparam int unsigned M  = $clog2(B),
  localparam int unsigned Z  = zero_blocks(N, L, C),
  localparam int unsigned ZE = (Z > 0) ? Z : 1,
  localparam int unsigned BW = (M > 0) ? M : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid_i,
  input  logic [L-1:0]          in_blk_i,
  output logic                  in_sof_o,
  output logic                  out_valid_o,
  output logic [BW-1:0]         out_blk_o,
  output logic [L-1:0]          out_x_o,
  output logic                  out_ext_valid_o,
  output logic [ZE-1:0][L-1:0]  out_ext_x_o
);
  localparam int unsigned STEPS = Z + 1;
  localparam int unsigned CR    = C - Z * L;  // frozen bits inside the first fed block

  if (N <= L || (1 << $clog2(N)) != N || (1 << $clog2(L)) != L || L < 2) begin : g_bad
    $error("pruned_folded_encoder: N and L must be powers of two with 2 <= L < N");
  end

  logic [STEPS-1:0]        step_en;
  logic [STEPS-1:0][M-1:0] sw_cross;
  logic [L-1:0]            mask, v;

  encoder_ctrl #(.N(N), .L(L), .C(C)) u_ctrl (
    .clk, .rst_n, .in_valid_i,
    .in_sof_o, .step_en_o(step_en), .cross_o(sw_cross),
    .out_valid_o, .out_blk_o, .out_ext_valid_o
  );

  // Frozen bits of the first fed block are zero by definition.
  always_comb begin
    for (int unsigned l = 0; l < L; l++) mask[l] = !(in_sof_o && (l < CR));
  end

  spatial_network #(.L(L)) u_spatial (.u_i(in_blk_i & mask), .v_o(v));

  // Lane p entering the first temporal stage in step s: only the last step of a
  // cycle sees the fed block, the extra steps see zeros.
  logic sig0 [L][STEPS];
  for (genvar p = 0; p < L; p++) begin : g_in
    for (genvar s = 0; s < STEPS; s++) begin : g_s
      assign sig0[p][s] = (s == Z) ? v[p] : 1'b0;
    end
  end

  // Temporal stage i: S_K commutator (K = 2^(i+1)) and XP unit on every chain.
  for (genvar i = 0; i < M; i++) begin : g_stage
    logic si [L][STEPS];   // stage input
    logic so [L][STEPS];   // stage output
    logic [STEPS-1:0] cr;  // switch setting of this stage in each step
    for (genvar p = 0; p < L; p++) begin : g_lane
      for (genvar s = 0; s < STEPS; s++) begin : g_s
        if (i == 0) begin : g_first
          assign si[p][s] = sig0[p][s];
        end else begin : g_next
          assign si[p][s] = g_stage[i-1].so[p][s];
        end
      end
    end
    for (genvar s = 0; s < STEPS; s++) begin : g_cr
      assign cr[s] = sw_cross[s][i];
    end
    for (genvar c = 0; c < L / 2; c++) begin : g_chain
      logic top [STEPS];
      logic bot [STEPS];
      commutator #(.K(2 << i), .STEPS(STEPS)) u_s (
        .clk, .rst_n, .en_i(step_en), .cross_i(cr),
        .a_i(si[2*c]), .b_i(si[2*c+1]), .top_o(top), .bot_o(bot)
      );
      for (genvar s = 0; s < STEPS; s++) begin : g_xp
        xp u_xp (.a_i(top[s]), .b_i(bot[s]), .a_o(so[2*c][s]), .b_o(so[2*c+1][s]));
      end
    end
  end

  for (genvar p = 0; p < L; p++) begin : g_out
    assign out_x_o[p] = g_stage[M-1].so[p][Z];
    for (genvar e = 0; e < ZE; e++) begin : g_ext
      if (Z > 0) begin : g_z
        assign out_ext_x_o[e][p] = g_stage[M-1].so[p][e];
      end else begin : g_nz
        assign out_ext_x_o[e][p] = 1'b0;  // no extra steps without pruning
      end
    end
  end
endmodule

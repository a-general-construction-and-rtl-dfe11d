// encoder_ctrl: control module of the pruned folded polar encoder.
//
// A frame of N source bits is B = N/L blocks of L bits. The first Z = floor(C/L)
// blocks contain only frozen zeros and are never fed; the remaining P = B - Z blocks
// arrive one per accepted cycle (in_valid_i high). The counter r_q (0 .. P-1) names
// the block being accepted: block r_q + Z of the frame.
//
// The commutator datapath still sees B steps per frame. In the cycle that accepts
// the first fed block (r_q = 0) it runs Z extra steps with zero input before the real
// step; those steps have the fixed frame cycles 0 .. Z-1. The real step has frame
// cycle t = r_q + Z. The switch of commutator stage i (delay 2^i) is crossed when bit
// i of (t - (2^i - 1)) mod B is one; stage i sees its data 2^i - 1 cycles after the
// frame started, which is where the offset comes from.
//
// Outputs: step enables and switch settings of every step, the index of the output
// block produced by the real step, and valid flags. The real step emits block 0 of the
// current frame in the last accepted cycle of the frame (r_q = P-1) and blocks Z+1 ..
// B-1 of the previous frame otherwise; the extra steps emit blocks 1 .. Z of the
// previous frame together in the first cycle. A block of the previous frame is only
// flagged valid once a whole frame has been accepted since reset. Nothing moves while
// in_valid_i is low. Synchronous to clk, asynchronous active-low reset.
//
// The paper fixes the skipped blocks, the latency ceil((N-C)/L) and the merging of
// output cycles; the counter, the switch formula and the place of the merged cycle
// (first cycle of the next frame) are this design's own.
module encoder_ctrl
  import polar_pkg::*;
#(
  parameter int unsigned N = 1024,
  parameter int unsigned L = 32,
  parameter int unsigned C = 342,
  localparam int unsigned B     = N / L,
  localparam int unsigned M     = $clog2(B),
  localparam int unsigned Z     = zero_blocks(N, L, C),
  localparam int unsigned STEPS = Z + 1,
  localparam int unsigned BW    = (M > 0) ? M : 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid_i,
  output logic in_sof_o,        // the block accepted now is the first fed block of a frame
  output logic [STEPS-1:0]        step_en_o,
  output logic [STEPS-1:0][M-1:0] cross_o,   // cross_o[s][i]: stage i switch in step s
  output logic out_valid_o,     // real-step output block is valid
  output logic [BW-1:0] out_blk_o,   // its block index k
  output logic out_ext_valid_o  // extra-step outputs (blocks 1..Z) are valid
);
  localparam int unsigned P     = B - Z;
  localparam int unsigned RW    = (P > 1) ? $clog2(P) : 1;

  logic [RW-1:0] r_q;
  logic          prev_q;   // a complete frame has been accepted
  logic          last;

  assign last     = (32'(r_q) == P - 1);
  assign in_sof_o = (r_q == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_q    <= '0;
      prev_q <= 1'b0;
    end else if (in_valid_i) begin
      // The frame counter never leaves its range.
      a_r_range: assert (32'(r_q) < P);
      if (last) begin
        r_q    <= '0;
        prev_q <= 1'b1;
      end else begin
        r_q <= r_q + 1'b1;
      end
    end
  end

  always_comb begin
    int unsigned t;
    for (int unsigned s = 0; s < STEPS; s++) begin
      if (s < Z) begin
        t            = s;
        step_en_o[s] = in_valid_i && (r_q == '0);
      end else begin
        t            = 32'(r_q) + Z;
        step_en_o[s] = in_valid_i;
      end
      for (int unsigned i = 0; i < M; i++)
        cross_o[s][i] = 1'(((t + B - ((1 << i) - 1)) % B) >> i);
    end
  end

  assign out_blk_o       = last ? '0 : BW'(32'(r_q) + Z + 1);
  assign out_valid_o     = in_valid_i && (last || prev_q);
  assign out_ext_valid_o = in_valid_i && (r_q == '0) && prev_q && (Z > 0);
endmodule

// enc_bench: one encoder configuration wired to the scoreboard enc_checker.
// Used by the end-to-end testbench to run several sizes side by side.
module enc_bench #(
  parameter int unsigned N      = 16,
  parameter int unsigned L      = 4,
  parameter int unsigned C      = 7,
  parameter int unsigned FRAMES = 6
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int unsigned B  = N / L;
  localparam int unsigned Z  = (C / L > B - 1) ? B - 1 : C / L;
  localparam int unsigned ZE = (Z > 0) ? Z : 1;
  localparam int unsigned BW = ($clog2(B) > 0) ? $clog2(B) : 1;

  logic in_valid, in_sof, out_valid, out_ext_valid;
  logic [L-1:0] in_blk, out_x;
  logic [BW-1:0] out_blk;
  logic [ZE-1:0][L-1:0] out_ext_x;

  pruned_folded_encoder #(.N(N), .L(L), .C(C)) u_dut (
    .clk, .rst_n, .in_valid_i(in_valid), .in_blk_i(in_blk), .in_sof_o(in_sof),
    .out_valid_o(out_valid), .out_blk_o(out_blk), .out_x_o(out_x),
    .out_ext_valid_o(out_ext_valid), .out_ext_x_o(out_ext_x)
  );

  enc_checker #(.N(N), .L(L), .C(C), .FRAMES(FRAMES)) u_chk (
    .clk, .rst_n, .in_valid, .in_blk, .in_sof, .out_valid, .out_blk, .out_x,
    .out_ext_valid, .out_ext_x, .done, .checks, .failures
  );
endmodule

// tb_pruned_folded_encoder_full: the encoder at its default size, N=1024, L=32,
// C=342 (the (1024,744) punctured code), fed six random frames with stalls and
// checked bit by bit against a reference encoder. Latency and frame period must be
// ceil((1024-342)/32) = 22 cycles.
module tb_pruned_folded_encoder_full;
  localparam int unsigned N = 1024, L = 32, C = 342;
  localparam int unsigned Z = C / L, BW = $clog2(N / L);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_sof, out_valid, out_ext_valid, done;
  logic [L-1:0] in_blk, out_x;
  logic [BW-1:0] out_blk;
  logic [Z-1:0][L-1:0] out_ext_x;
  int checks, failures;

  pruned_folded_encoder u_dut (
    .clk, .rst_n, .in_valid_i(in_valid), .in_blk_i(in_blk), .in_sof_o(in_sof),
    .out_valid_o(out_valid), .out_blk_o(out_blk), .out_x_o(out_x),
    .out_ext_valid_o(out_ext_valid), .out_ext_x_o(out_ext_x)
  );

  enc_checker #(.N(N), .L(L), .C(C), .FRAMES(6)) u_chk (
    .clk, .rst_n, .in_valid, .in_blk, .in_sof, .out_valid, .out_blk, .out_x,
    .out_ext_valid, .out_ext_x, .done, .checks, .failures
  );

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (done);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pruned_folded_encoder: end-to-end test of the pruned folded polar encoder.
//
// Runs four configurations side by side, each fed random frames with stalls and
// checked bit by bit against a reference encoder, with latency and frame period
// checked in cycles:
//   N=16,   L=4,  C=7   the worked 16-bit example (3-cycle frames, one merged cycle)
//   N=16,   L=4,  C=0   no pruning: the plain folded encoder, 4-cycle frames
//   N=256,  L=32, C=95  the (256,186) punctured code, 6-cycle frames
//   N=64,   L=8,  C=13  a further size, 7-cycle frames
//   N=64,   L=8,  C=16  C a multiple of L: two whole blocks skipped, 6-cycle frames
//   N=32,   L=2,  C=5   the narrowest datapath, 14-cycle frames
module tb_pruned_folded_encoder;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NB = 6;
  logic done [NB];
  int   chk [NB], fail [NB];

  enc_bench #(.N(16),  .L(4),  .C(7),  .FRAMES(8)) u_b0 (.clk, .rst_n, .done(done[0]), .checks(chk[0]), .failures(fail[0]));
  enc_bench #(.N(16),  .L(4),  .C(0),  .FRAMES(8)) u_b1 (.clk, .rst_n, .done(done[1]), .checks(chk[1]), .failures(fail[1]));
  enc_bench #(.N(256), .L(32), .C(95), .FRAMES(8)) u_b2 (.clk, .rst_n, .done(done[2]), .checks(chk[2]), .failures(fail[2]));
  enc_bench #(.N(64),  .L(8),  .C(13), .FRAMES(8)) u_b3 (.clk, .rst_n, .done(done[3]), .checks(chk[3]), .failures(fail[3]));
  enc_bench #(.N(64),  .L(8),  .C(16), .FRAMES(8)) u_b4 (.clk, .rst_n, .done(done[4]), .checks(chk[4]), .failures(fail[4]));
  enc_bench #(.N(32),  .L(2),  .C(5),  .FRAMES(8)) u_b5 (.clk, .rst_n, .done(done[5]), .checks(chk[5]), .failures(fail[5]));

  int checks, failures;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    checks = 0; failures = 1;
    for (int i = 0; i < NB; i++) begin checks += chk[i]; failures += fail[i]; end
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (done[0] && done[1] && done[2] && done[3] && done[4] && done[5]);
    @(posedge clk);
    checks = 0; failures = 0;
    for (int i = 0; i < NB; i++) begin checks += chk[i]; failures += fail[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

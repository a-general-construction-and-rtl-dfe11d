// tb_encoder_ctrl: the control module for the 16-bit example, N=16, L=4, with
// C=7 (one skipped block, 3-cycle frames, one extra step in the first cycle) and
// with C=0 (no pruning, 4-cycle frames). Expected switch settings, step enables,
// output block numbers and valid flags are written out as tables; random idle
// cycles check that the control holds while in_valid is low.
module tb_encoder_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic v;
  // C = 7
  logic       sof_a, ov_a, oev_a;
  logic [1:0] en_a;
  logic [1:0][1:0] cr_a;
  logic [1:0] blk_a;
  encoder_ctrl #(.N(16), .L(4), .C(7)) u_a (
    .clk, .rst_n, .in_valid_i(v), .in_sof_o(sof_a), .step_en_o(en_a), .cross_o(cr_a),
    .out_valid_o(ov_a), .out_blk_o(blk_a), .out_ext_valid_o(oev_a));
  // C = 0
  logic       sof_b, ov_b, oev_b;
  logic [0:0] en_b;
  logic [0:0][1:0] cr_b;
  logic [1:0] blk_b;
  encoder_ctrl #(.N(16), .L(4), .C(0)) u_b (
    .clk, .rst_n, .in_valid_i(v), .in_sof_o(sof_b), .step_en_o(en_b), .cross_o(cr_b),
    .out_valid_o(ov_b), .out_blk_o(blk_b), .out_ext_valid_o(oev_b));

  // frame cycle t -> {stage 1, stage 0} switch setting (1 = crossed)
  localparam logic [1:0] SW [4] = '{2'b10, 2'b01, 2'b00, 2'b11};

  task automatic chk(logic got, logic want, string what);
    checks++;
    if (got !== want) begin
      failures++;
      $display("%s: got %0d want %0d", what, got, want);
    end
  endtask

  initial begin : watchdog
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int ra, rb, fa, fb, stalls;
    ra = 0; rb = 0; fa = 0; fb = 0; stalls = 0;
    v = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int c = 0; c < 120; c++) begin
      v = (c < 8) || ($urandom % 4 != 0);
      if (!v) stalls++;
      #1;
      // C = 7: P = 3 blocks fed, frame cycles of the real step 1..3
      chk(sof_a, ra == 0, "sof_a");
      chk(en_a[0], v && ra == 0, "extra step enable");
      chk(en_a[1], v, "real step enable");
      checks++; if (cr_a[0] !== SW[0])      begin failures++; $display("extra step switches"); end
      checks++; if (cr_a[1] !== SW[ra + 1]) begin failures++; $display("real step switches r=%0d", ra); end
      checks++; if (blk_a !== ((ra == 2) ? 2'd0 : 2'(ra + 2))) begin failures++; $display("blk_a"); end
      chk(ov_a, v && (ra == 2 || fa > 0), "out_valid_a");
      chk(oev_a, v && ra == 0 && fa > 0, "out_ext_valid_a");
      // C = 0: P = 4
      chk(sof_b, rb == 0, "sof_b");
      chk(en_b[0], v, "step enable b");
      checks++; if (cr_b[0] !== SW[rb]) begin failures++; $display("switches b r=%0d", rb); end
      checks++; if (blk_b !== ((rb == 3) ? 2'd0 : 2'(rb + 1))) begin failures++; $display("blk_b"); end
      chk(ov_b, v && (rb == 3 || fb > 0), "out_valid_b");
      chk(oev_b, 1'b0, "out_ext_valid_b");
      if (v) begin
        if (ra == 2) begin ra = 0; fa++; end else ra++;
        if (rb == 3) begin rb = 0; fb++; end else rb++;
      end
      @(negedge clk);
    end
    checks++;
    if (stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

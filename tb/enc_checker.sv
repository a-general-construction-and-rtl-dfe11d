// enc_checker: stimulus and scoreboard for the pruned folded polar encoder.
//
// Drives FRAMES random source frames into the encoder (plus one flush frame whose
// outputs are not checked), with the first C bits of each frame frozen to zero, and
// compares every output block with the code word x = u * F^{(x)n} computed here by a
// plain butterfly over the whole frame. Bits of the first fed block that lie below C
// are driven with random garbage in odd frames, to check that the encoder forces
// them to zero. Random idle cycles (in_valid low) are inserted after the first two
// frames; those two frames run back to back and are used to check the latency and the
// frame period (both ceil((N-C)/L) cycles). Inputs change on the falling clock edge,
// outputs are sampled on the rising edge. Counts of the mechanisms seen (stalls,
// merged output cycles, masked frozen bits, frames) are reported and a mechanism that
// never occurred counts as a failure.
module enc_checker #(
  parameter int unsigned N      = 16,
  parameter int unsigned L      = 4,
  parameter int unsigned C      = 7,
  parameter int unsigned FRAMES = 6,
  localparam int unsigned B  = N / L,
  localparam int unsigned Z  = (C / L > B - 1) ? B - 1 : C / L,
  localparam int unsigned ZE = (Z > 0) ? Z : 1,
  localparam int unsigned P  = B - Z,
  localparam int unsigned BW = ($clog2(B) > 0) ? $clog2(B) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  output logic                 in_valid,
  output logic [L-1:0]         in_blk,
  input  logic                 in_sof,
  input  logic                 out_valid,
  input  logic [BW-1:0]        out_blk,
  input  logic [L-1:0]         out_x,
  input  logic                 out_ext_valid,
  input  logic [ZE-1:0][L-1:0] out_ext_x,
  output logic                 done,
  output int                   checks,
  output int                   failures
);
  bit u [FRAMES+1][N];
  bit x [FRAMES+1][N];
  int got [FRAMES+1];          // output blocks received per frame

  int f_in, r_in;              // frame and block position being fed
  int cyc, first_in_cyc, blk0_cyc [FRAMES+1];
  int n_stall, n_merged, n_masked;

  function automatic int unsigned brev(int unsigned v, int unsigned bits);
    int unsigned r = 0;
    for (int unsigned i = 0; i < bits; i++) r = (r << 1) | ((v >> i) & 1);
    return r;
  endfunction

  function automatic int unsigned idx(int unsigned k, int unsigned p);
    return (p % 2) * (N / 2) + k * (L / 2) + brev(p / 2, $clog2(L) - 1);
  endfunction

  task automatic check_blk(int fr, int unsigned k, logic [L-1:0] d, string what);
    for (int unsigned p = 0; p < L; p++) begin
      checks++;
      if (d[p] !== x[fr][idx(k, p)]) begin
        failures++;
        if (failures < 4)
          $display("N=%0d C=%0d MISMATCH %s frame %0d block %0d lane %0d: got %0d want %0d",
                   N, C, what, fr, k, p, d[p], x[fr][idx(k, p)]);
      end
    end
    got[fr]++;
  endtask

  initial begin
    // source frames and reference code words
    for (int f = 0; f <= FRAMES; f++) begin
      for (int j = 0; j < N; j++) u[f][j] = (j < C) ? 1'b0 : 1'($urandom);
      x[f] = u[f];
      for (int s = 1; s < N; s *= 2)
        for (int j = 0; j < N; j++)
          if ((j & s) == 0) x[f][j] = x[f][j] ^ x[f][j+s];
      got[f] = 0;
    end
    checks = 0; failures = 0; done = 0;
    f_in = 0; r_in = 0; cyc = 0; first_in_cyc = -1;
    n_stall = 0; n_merged = 0; n_masked = 0;
    in_valid = 0; in_blk = '0;
  end

  // block r of frame f as fed: garbage in the frozen bits of the first fed block
  // of odd frames
  function automatic logic [L-1:0] src_blk(int f, int r);
    logic [L-1:0] b;
    for (int unsigned l = 0; l < L; l++) b[l] = u[f][(r + Z) * L + l];
    if (r == 0 && (f % 2) == 1 && (C % L) != 0)
      for (int unsigned l = 0; l < C % L; l++) b[l] = 1'($urandom);
    return b;
  endfunction

  // stimulus, changed on the falling edge
  always @(negedge clk) begin
    bit stall;
    stall = (f_in >= 2) && (($urandom % 5) == 0);
    if (!rst_n || f_in > FRAMES || stall) begin
      in_valid = 1'b0;
    end else begin
      in_valid = 1'b1;
      in_blk   = src_blk(f_in, r_in);
    end
  end

  // scoreboard, sampled on the rising edge
  always @(posedge clk) begin
    cyc++;
    if (!in_valid && f_in <= FRAMES && f_in > 0) n_stall++;
    if (in_valid) begin
      int fprev;
      fprev = f_in - 1;
      if (f_in == 0 && r_in == 0) first_in_cyc = cyc;
      checks++;
      if (in_sof !== (r_in == 0)) begin
        failures++;
        $display("in_sof wrong at frame %0d block %0d", f_in, r_in);
      end
      if (r_in == 0 && (f_in % 2) == 1 && (C % L) != 0 && in_blk[(C%L)-1:0] != '0) n_masked++;
      // real-step output
      checks++;
      if (out_valid !== (r_in == P - 1 || f_in > 0)) begin
        failures++;
        $display("out_valid wrong at frame %0d block %0d", f_in, r_in);
      end
      if (out_valid) begin
        int unsigned k;
        int fr;
        k  = (r_in == P - 1) ? 0 : r_in + Z + 1;
        fr = (r_in == P - 1) ? f_in : fprev;
        checks++;
        if (out_blk !== BW'(k)) begin
          failures++;
          $display("out_blk %0d, want %0d", out_blk, k);
        end
        if (fr < FRAMES) check_blk(fr, k, out_x, "main");
        if (k == 0) blk0_cyc[fr] = cyc;
      end
      // merged blocks 1..Z of the previous frame
      checks++;
      if (out_ext_valid !== (Z > 0 && r_in == 0 && f_in > 0)) begin
        failures++;
        $display("out_ext_valid wrong at frame %0d block %0d", f_in, r_in);
      end
      if (out_ext_valid) begin
        n_merged++;
        for (int unsigned e = 0; e < Z; e++)
          if (fprev < FRAMES) check_blk(fprev, e + 1, out_ext_x[e], "merged");
      end
      if (r_in == P - 1) begin r_in = 0; f_in++; end
      else r_in++;
      if (f_in > FRAMES) begin
        // every checked frame complete
        for (int f = 0; f < FRAMES; f++) begin
          checks++;
          if (got[f] != B) begin
            failures++;
            $display("frame %0d: %0d of %0d blocks", f, got[f], B);
          end
        end
        // latency: first input to first output, counted inclusively (paper's tables)
        checks++;
        if (blk0_cyc[0] - first_in_cyc + 1 != P) begin
          failures++;
          $display("latency %0d, want %0d", blk0_cyc[0] - first_in_cyc + 1, P);
        end
        // frame period of back-to-back frames
        checks++;
        if (blk0_cyc[1] - blk0_cyc[0] != P) begin
          failures++;
          $display("frame period %0d, want %0d", blk0_cyc[1] - blk0_cyc[0], P);
        end
        $display("N=%0d L=%0d C=%0d: frames=%0d latency=%0d period=%0d stalls=%0d merged=%0d masked=%0d",
                 N, L, C, FRAMES, blk0_cyc[0] - first_in_cyc + 1, blk0_cyc[1] - blk0_cyc[0],
                 n_stall, n_merged, n_masked);
        checks++;
        if (n_stall == 0 && FRAMES > 2) begin failures++; $display("no stall happened"); end
        checks++;
        if (Z > 0 && n_merged == 0) begin failures++; $display("no merged output cycle"); end
        checks++;
        if ((C % L) != 0 && FRAMES > 1 && n_masked == 0) begin
          failures++; $display("no frozen-bit masking exercised");
        end
        done = 1;
      end
    end
  end
endmodule

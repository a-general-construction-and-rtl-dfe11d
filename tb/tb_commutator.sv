// tb_commutator: the S_K commutator with K = 4 (two delays per side).
//
// Part 1, single step: with the switch crossed in cycles t where (t/2) is odd, the
// outputs pair stream elements two cycles apart: (top, bot) = (a[t-2], a[t]) in
// crossed cycles and (b[t-4], b[t-2]) in straight ones.
// Part 2, three steps per cycle with random enables and switch settings, compared
// with a reference that performs the enabled steps one after another on its own
// delay queues.
module tb_commutator;
  localparam int unsigned K = 4, D = K / 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // part 1
  logic       en1 [1];
  logic [0:0] en1v, cr1;
  logic       a1 [1], b1 [1], t1 [1], o1 [1];
  assign en1v = 1'b1;
  commutator #(.K(K), .STEPS(1)) u_one (
    .clk, .rst_n, .en_i(en1v), .cross_i(cr1), .a_i(a1), .b_i(b1), .top_o(t1), .bot_o(o1));

  // part 2
  logic [2:0] en3, cr3;
  logic       a3 [3], b3 [3], t3 [3], o3 [3];
  commutator #(.K(K), .STEPS(3)) u_three (
    .clk, .rst_n, .en_i(en3), .cross_i(cr3), .a_i(a3), .b_i(b3), .top_o(t3), .bot_o(o3));

  bit ah [$], bh [$];      // stream history for part 1
  bit bq [$], tq [$];      // reference delay queues for part 2, oldest at the front

  initial begin : watchdog
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int i = 0; i < D; i++) begin bq.push_back(0); tq.push_back(0); end
    en3 = '0; cr3 = '0; cr1 = '0;
    for (int s = 0; s < 3; s++) begin a3[s] = 0; b3[s] = 0; end
    a1[0] = 0; b1[0] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      // drive both units
      a1[0] = 1'($urandom); b1[0] = 1'($urandom);
      cr1   = 1'((t / D) % 2);
      en3 = 3'($urandom); cr3 = 3'($urandom);
      for (int s = 0; s < 3; s++) begin a3[s] = 1'($urandom); b3[s] = 1'($urandom); end
      #1;
      // part 1 check
      ah.push_back(a1[0]); bh.push_back(b1[0]);
      if (t >= 2 * D) begin
        checks += 2;
        if (cr1[0]) begin
          if (t1[0] !== ah[t-D]  || o1[0] !== ah[t])   failures++;
        end else begin
          if (t1[0] !== bh[t-2*D] || o1[0] !== bh[t-D]) failures++;
        end
      end
      // part 2 check, step by step
      for (int s = 0; s < 3; s++) begin
        bit bd, swt, bot, top;
        bd  = bq[0];
        top = tq[0];
        swt = cr3[s] ? bd : a3[s];
        bot = cr3[s] ? a3[s] : bd;
        if (en3[s]) begin
          checks += 2;
          if (t3[s] !== top) failures++;
          if (o3[s] !== bot) failures++;
          void'(bq.pop_front()); bq.push_back(b3[s]);
          void'(tq.pop_front()); tq.push_back(swt);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

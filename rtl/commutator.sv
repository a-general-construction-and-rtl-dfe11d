// commutator: the S_K module of the folded polar encoder (delay-switch-delay).
//
// Two serial streams enter on a_i (upper) and b_i (lower). The lower stream passes
// a K/2-stage delay line, then a 2x2 switch either passes both lines straight or
// crosses them, and the upper switch output passes a second K/2-stage delay line.
// With the switch toggled every K/2 cycles the unit regroups the streams so that the
// two outputs of one cycle are stream elements K/2 cycles apart, ready for the XP
// unit that follows it.
//
// The unit can advance several times in one clock cycle. Step s (s = 0 .. STEPS-1)
// uses a_i[s], b_i[s], cross_i[s] and produces top_o[s], bot_o[s]; it changes the
// delay lines only when en_i[s] is high, otherwise the state passes through it
// unchanged. The registers take the state left after the last step. STEPS = 1 is the
// plain commutator; the pruned encoder uses STEPS > 1 to run the cycles of the
// all-zero leading blocks of a frame inside one clock cycle. Outputs are
// combinational from the inputs and the registered state; the delay lines reset to
// zero.
//
// The K/2 delays on the lower input and on the upper output follow the S_K drawing;
// the multi-step port is this design's own means of pruning.
module commutator #(
  parameter int unsigned K     = 2,  // S_K: K/2 delays on each side
  parameter int unsigned STEPS = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [STEPS-1:0] en_i,
  input  logic [STEPS-1:0] cross_i,
  input  logic             a_i   [STEPS],
  input  logic             b_i   [STEPS],
  output logic             top_o [STEPS],
  output logic             bot_o [STEPS]
);
  localparam int unsigned D = K / 2;

  logic [D-1:0] bd_q, td_q;            // lower-input and upper-output delay lines

  // Step s reads the state left by step s-1 (the registers for s = 0) and leaves
  // its own in g_step[s].bd_n / td_n.
  for (genvar s = 0; s < STEPS; s++) begin : g_step
    logic [D-1:0] bd, td;      // state before this step
    logic [D-1:0] bd_n, td_n;  // state after this step
    logic b_d;                 // lower input after its delay line
    logic swt;                 // upper switch output
    if (s == 0) begin : g_first
      assign bd = bd_q;
      assign td = td_q;
    end else begin : g_next
      assign bd = g_step[s-1].bd_n;
      assign td = g_step[s-1].td_n;
    end
    assign b_d      = bd[D-1];
    assign swt      = cross_i[s] ? b_d    : a_i[s];
    assign bot_o[s] = cross_i[s] ? a_i[s] : b_d;
    assign top_o[s] = td[D-1];
    if (D == 1) begin : g_d1
      assign bd_n = en_i[s] ? b_i[s] : bd;
      assign td_n = en_i[s] ? swt    : td;
    end else begin : g_dn
      assign bd_n = en_i[s] ? {bd[D-2:0], b_i[s]} : bd;
      assign td_n = en_i[s] ? {td[D-2:0], swt}    : td;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bd_q <= '0;
      td_q <= '0;
    end else begin
      bd_q <= g_step[STEPS-1].bd_n;
      td_q <= g_step[STEPS-1].td_n;
    end
  end
endmodule

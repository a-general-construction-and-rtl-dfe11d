// xp: XOR-or-PASS butterfly, the arithmetic unit of the folded polar encoder.
//
// One 2x2 kernel F = [1 0; 1 1] of the polar transform: the upper output is the
// exclusive-or of both inputs, the lower output repeats the lower input. Purely
// combinational, no clock. This is the unit drawn as "XP" in the architecture.
module xp (
  input  logic a_i,  // upper input
  input  logic b_i,  // lower input
  output logic a_o,  // a_i ^ b_i
  output logic b_o   // b_i
);
  assign a_o = a_i ^ b_i;
  assign b_o = b_i;
endmodule

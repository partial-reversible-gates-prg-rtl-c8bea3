// prg: the partial reversible gate (PRG), a 4-input, 4-output gate.
//
// The outputs are four fixed Boolean functions of the inputs A, B, C and D:
//   P = D'
//   Q = CD + (C+D)'          (C XNOR D)
//   R = B'(C+D) + B(C+D)'    (B XOR (C+D))
//   W = A + B(C+D)
// If ABCD is a BCD digit (0000..1001), {W,R,Q,P} is that digit's excess-3 code.
// Over those ten inputs the mapping is one-to-one, so the gate is logically
// reversible there. On the six non-BCD inputs (1010..1111) several inputs share
// an output, so the gate is reversible only in part, which gives it its name.
// The gate is built for a job on which those six inputs never occur.
//
// Interface: four single-bit inputs and four single-bit outputs, named as in the
// gate's symbol. The tabulated form of the gate calls the fourth output S. Here
// it is w, as on the symbol.
// Timing: purely combinational, with no clock or reset. It counts as one gate,
// that is, one unit of delay.
//
// The four output equations are the published ones. They are applied to all 16
// inputs, including the six non-BCD ones. There the published truth table
// differs from the equations in one entry: for input 1011 it lists Q = 0, where
// the equations give Q = 1. This design follows the equations.
module prg (
  input  logic a,
  input  logic b,
  input  logic c,
  input  logic d,
  output logic p,
  output logic q,
  output logic r,
  output logic w
);

  logic c_or_d;

  always_comb begin
    c_or_d = c | d;
    p = ~d;
    q = (c & d) | ~c_or_d;
    r = (~b & c_or_d) | (b & ~c_or_d);
    w = a | (b & c_or_d);
  end

endmodule

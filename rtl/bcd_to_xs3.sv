// bcd_to_xs3: a reversible BCD-to-excess-3 code converter made of a single
// partial reversible gate (prg), with no garbage outputs.
//
// The excess-3 code of a decimal digit is the digit plus 3. The usual reversible
// way to compute it is a 4-bit reversible adder that adds 0011, which takes
// four full-adder gates and leaves nine garbage outputs. The prg gate computes
// the code directly. It is not reversible on all 16 inputs, only on the ten
// BCD digits. A BCD converter never sees the other six inputs, so for this job
// the one gate is a complete reversible converter: one gate, zero garbage
// outputs, one gate delay.
//
// Interface: bcd = {A, B, C, D}, with A the MSB; xs3 = {W, R, Q, P}, the gate's
// outputs, MSB first. Purely combinational.
//
// The converter is the published one. The bus bit order and the assertion are
// this design's own. The assertion states the converter's precondition: its
// input is a BCD digit, 0..9. A non-BCD input still yields the gate's Sect-2
// output, but a simulation reports it as an error.
module bcd_to_xs3
  import bcd_pkg::*;
(
  input  bcd_digit_t bcd,
  output xs3_code_t  xs3
);

  prg u_prg (
    .a(bcd[3]),
    .b(bcd[2]),
    .c(bcd[1]),
    .d(bcd[0]),
    .p(xs3[0]),
    .q(xs3[1]),
    .r(xs3[2]),
    .w(xs3[3])
  );

  // The gate is reversible only for BCD inputs.
  always_comb begin
    assert (is_bcd(bcd))
      else $error("bcd_to_xs3: input %b is not a BCD digit", bcd);
  end

endmodule

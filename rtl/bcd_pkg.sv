// bcd_pkg: types and constants shared by the BCD-to-excess-3 converter and its
// testbenches.
//
// A BCD digit is a 4-bit code whose legal values are 0..9. Its excess-3 code is
// the digit plus 3, so a legal digit maps to a code in the range 3..12. Codes
// 1010..1111 are not BCD digits. The partial reversible gate is reversible only
// for the digits 0..9 ("Sect-1"); the other six input codes are its "Sect-2".
package bcd_pkg;

  typedef logic [3:0] bcd_digit_t;  // {A, B, C, D}, A is the MSB
  typedef logic [3:0] xs3_code_t;   // excess-3 code, MSB first

  localparam int unsigned BCD_MAX    = 9;  // largest legal BCD digit

  // True for the ten codes on which the partial reversible gate is reversible.
  function automatic logic is_bcd(input bcd_digit_t v);
    return v <= bcd_digit_t'(BCD_MAX);
  endfunction

endpackage

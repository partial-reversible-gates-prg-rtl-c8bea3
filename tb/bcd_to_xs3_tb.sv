// bcd_to_xs3_tb: end-to-end testbench for the one-gate BCD-to-excess-3 converter.
//
// The converter's parameters are left at their defaults (it has none), so this is
// also the full-size test. It does the following:
//  * converts each of the ten BCD digits and checks the result against digit + 3;
//  * checks reversibility: subtracting 3 from each result recovers the digit, and
//    no two digits share a result;
//  * converts 200 random digits and checks each one the same way;
//  * checks the converter's delay: the result must be valid one time unit (one
//    gate delay) after the input changes.
// It counts how often each mechanism is exercised (conversion, inversion back to
// the digit, the one-to-one check). A mechanism that never runs counts as a
// failure. Non-BCD inputs are not applied: the converter asserts that its input
// is a BCD digit, and the gate's behaviour on such inputs is tested in prg_tb.
module bcd_to_xs3_tb;
  import bcd_pkg::*;

  localparam int unsigned XS3_OFFSET = 3;  // excess-3 code = digit + 3

  int checks   = 0;
  int failures = 0;

  bcd_digit_t bcd = '0;
  xs3_code_t  xs3;

  int n_convert   = 0;
  int n_invert    = 0;
  int n_one2one   = 0;

  bcd_to_xs3 dut (.bcd, .xs3);

  xs3_code_t code_of [10];

  task automatic convert_and_check(input int unsigned digit);
    bcd = bcd_digit_t'(digit);
    #1;  // one unit of gate delay
    n_convert++;
    checks++;
    if (int'(xs3) != int'(digit) + int'(XS3_OFFSET)) begin
      failures++;
      $display("FAIL bcd=%0d: xs3=%b expected %0d", digit, xs3, digit + XS3_OFFSET);
    end
    // Reversibility: the excess-3 code determines the digit.
    n_invert++;
    checks++;
    if (int'(xs3) - int'(XS3_OFFSET) != int'(digit)) begin
      failures++;
      $display("FAIL bcd=%0d: xs3=%b does not invert back to the digit", digit, xs3);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    for (int unsigned dgt = 0; dgt <= BCD_MAX; dgt++) begin
      convert_and_check(dgt);
      code_of[dgt] = xs3;
    end

    for (int i = 0; i <= int'(BCD_MAX); i++)
      for (int j = i + 1; j <= int'(BCD_MAX); j++) begin
        n_one2one++;
        checks++;
        if (code_of[i] == code_of[j]) begin
          failures++;
          $display("FAIL digits %0d and %0d share code %b", i, j, code_of[i]);
        end
      end

    for (int k = 0; k < 200; k++)
      convert_and_check($urandom_range(BCD_MAX, 0));

    checks += 3;
    if (n_convert == 0) begin failures++; $display("FAIL no conversion ran"); end
    if (n_invert  == 0) begin failures++; $display("FAIL no inversion ran"); end
    if (n_one2one == 0) begin failures++; $display("FAIL no one-to-one check ran"); end
    $display("mechanisms: conversions=%0d inversions=%0d one-to-one pairs=%0d",
             n_convert, n_invert, n_one2one);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

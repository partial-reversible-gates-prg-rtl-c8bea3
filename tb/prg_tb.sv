// prg_tb: self-checking testbench for the partial reversible gate.
//
// It applies all 16 input codes ABCD and checks the four outputs against values
// worked out here, not taken from the gate:
//  * Inputs 0..9 (Sect-1): {W,R,Q,P} must equal the input plus 3. The tabulated
//    truth table gives these rows MSB first, and they are copied below.
//  * Inputs 10..15 (Sect-2): {P,Q,R,W} must equal the tabulated rows, which are
//    given in P,Q,R,W order. One exception is input 1011: the table lists 0011,
//    but the gate's equations give Q = CD + (C+D)' = 1, hence 0111. The design
//    follows the equations.
//  * Reversibility: the ten Sect-1 outputs must all differ (one-to-one), and at
//    least one Sect-2 output must repeat a Sect-1 output, since over all 16
//    inputs the gate is not reversible.
// The gate is combinational. Each output is sampled 1 time unit after its input
// changes, which stands for the gate's single unit of delay.
module prg_tb;

  int checks   = 0;
  int failures = 0;

  logic a = 1'b0, b = 1'b0, c = 1'b0, d = 1'b0;
  logic p, q, r, w;

  prg dut (.a, .b, .c, .d, .p, .q, .r, .w);

  // Table I, Sect-1 outputs, listed MSB first (digit + 3).
  localparam logic [3:0] SECT1_MSB_FIRST [10] = '{
    4'b0011, 4'b0100, 4'b0101, 4'b0110, 4'b0111,
    4'b1000, 4'b1001, 4'b1010, 4'b1011, 4'b1100
  };
  // Table I, Sect-2 outputs, in P,Q,R,W order, for inputs 1010..1111, with the
  // 1011 row following the gate's equations (see above).
  localparam logic [3:0] SECT2_PQRW [6] = '{
    4'b1011, 4'b0111, 4'b1111, 4'b0001, 4'b1001, 4'b0101
  };

  logic [3:0] seen_xs3 [16];

  task automatic check(input string what, input logic [3:0] got, input logic [3:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  initial begin : watchdog
    #10000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    int collisions;
    logic [3:0] val;
    for (int v = 0; v < 16; v++) begin
      val = 4'(v);
      {a, b, c, d} = val;
      #1;
      if (v <= 9) begin
        check($sformatf("Sect-1 in=%b table", val), {w, r, q, p}, SECT1_MSB_FIRST[v]);
        check($sformatf("Sect-1 in=%b plus3", val), {w, r, q, p}, 4'(v + 3));
        seen_xs3[v] = {w, r, q, p};
      end else begin
        check($sformatf("Sect-2 in=%b table", val), {p, q, r, w}, SECT2_PQRW[v - 10]);
        // Non-reversibility: does this output repeat a Sect-1 output?
        collisions = 0;
        for (int k = 0; k <= 9; k++)
          if (seen_xs3[k] == {w, r, q, p}) collisions++;
        seen_xs3[v] = {w, r, q, p};
        if (collisions > 0)
          $display("note: Sect-2 input %b gives a Sect-1 output %b", val, {w, r, q, p});
      end
    end

    // One-to-one over Sect-1.
    for (int i = 0; i <= 9; i++)
      for (int j = i + 1; j <= 9; j++) begin
        checks++;
        if (seen_xs3[i] == seen_xs3[j]) begin
          failures++;
          $display("FAIL Sect-1 inputs %0d and %0d share output %b", i, j, seen_xs3[i]);
        end
      end

    // Not one-to-one over all 16 inputs.
    begin
      automatic int dup = 0;
      for (int i = 0; i < 16; i++)
        for (int j = i + 1; j < 16; j++)
          if (seen_xs3[i] == seen_xs3[j]) dup++;
      checks++;
      if (dup == 0) begin
        failures++;
        $display("FAIL gate is one-to-one over all 16 inputs; Sect-2 should break that");
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// basic_arith -- bit-serial adder of one near-memory unit.
//
// The two sensed bit-line values of a row are its operands: with the same
// bit of A and B selected together, CBL carries A AND B and CBLB carries
// NOR(A, B). From those the unit forms A XOR B = NOT(AB OR NOR(A,B)), the sum
// bit (A XOR B) XOR Cin and the carry-out AB OR ((A XOR B) AND Cin).
//
// MUX1 chooses the carry used for the current bit: the reset value init_val
// when cin_init is high (bit 0 of a word: 0 for addition, 1 for subtraction
// of a pre-inverted operand), otherwise the carry latch. The carry latch is
// loaded with carry-out when latch_en is high. (MUX2 of the published
// module, which picks the adder or the multiplier result, is the load
// multiplexer of the word register in near_mem_unit.)
//
// Timing: sum and cout are combinational; the carry latch updates at
// the rising clock edge. One bit per clock.
//
// Structure (latched A-AND-B / NOR inputs, XOR, MUX1, carry latch,
// carry-in of 1 for subtraction) follows the published arithmetic module;
// the gate-level carry equation is the ordinary full adder.
module basic_arith (
  input  logic clk,
  input  logic and_ab,
  input  logic nor_ab,
  input  logic latch_en,
  input  logic cin_init,
  input  logic init_val,
  output logic sum,
  output logic cout
);

  logic carry_q;   // the Cin latch
  logic cin;       // MUX1 output
  logic x;

  assign cin  = cin_init ? init_val : carry_q;
  assign x    = ~(and_ab | nor_ab);
  assign sum  = x ^ cin;
  assign cout = and_ab | (x & cin);

  always_ff @(posedge clk)
    if (latch_en) carry_q <= cout;

endmodule

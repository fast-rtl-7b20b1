// fast_carry_latch: behavioural model (not for synthesis) of the 1-bit full
// adder and its dynamic carry latch, at the level of the shift phases.
//
// The full adder adds the bit leaving the word (in), the external operand bit
// and the carry-in, and returns the sum to the MSB cell. The carry-out goes
// through a switch closed by phi1 into an inverter whose output is node T1,
// then through a switch closed by phi2d into a second inverter whose output
// is the carry-in. So during phase 1 (phi1 on, phi2d off) the new carry is
// parked on T1 while the carry-in still holds the previous one, and in
// phase 3 (phi2d on) it becomes the carry-in of the next bit. clr forces the
// carry-in to 0 before an addition starts (the source does not say how the
// carry is initialised; this input is this model's own).
//
// Charge-holding nodes are written as latches on purpose, as in
// fast_cell_10t. Lint reports a circular path cout -> n1 -> T1 -> n2 -> cin
// -> cout: it is the carry feedback of the bit-serial addition and is
// never transparent end to end, since phi1 and phi2d are never on together.
// The gate-level structure of the full adder is not given;
// only its logic function is modelled.
module fast_carry_latch (
  input  logic phi1,
  input  logic phi2d,
  input  logic clr,
  input  logic in,        // bit from the LSB cell
  input  logic operand,   // external addend bit
  output logic sum,       // to the MSB cell's shift input
  output logic cout,
  output logic t1,        // node T1 (inverted stored carry)
  output logic cin
);

  logic n1;   // input of the first inverter, charged through phi1
  logic n2;   // input of the second inverter, charged through phi2d

  assign sum  = in ^ operand ^ cin;
  assign cout = (in & operand) | (in & cin) | (operand & cin);

  always_latch begin
    if (clr)       n1 = 1'b0;
    else if (phi1) n1 = cout;
  end

  assign t1 = ~n1;

  always_latch begin
    if (clr)        n2 = 1'b1;
    else if (phi2d) n2 = t1;
  end

  assign cin = ~n2;

endmodule

// fast_alu: the 1-bit ALU that closes each word loop of a FAST row.
//
// It sits between the LSB cell and the MSB cell of a word. On every shift
// step the LSB of the word leaves the row, goes through the ALU and re-enters
// at the MSB end, so after q steps a q-bit word has passed through the ALU
// once, LSB first, and is back in place. In ALU_ADD mode the ALU is a full
// adder: it adds the incoming bit, one operand bit supplied from outside, and
// the carry of the previous step. The carry is held in a latch (node T1 of
// the circuit): it is captured when phi1 is on and handed back as carry-in
// when phi2d turns on, i.e. one shift step later. In ALU_PASS mode the bit is
// returned unchanged and the row only rotates.
//
// Timing: sum is combinational from lsb_in, operand and the stored carry; the
// carry register updates on the same clock edge as the cells (shift_en).
// carry_clr zeroes the carry before an addition starts. An inactive ALU (its
// word is joined to the next one) passes the bit and keeps its carry at zero.
// The full adder and carry latch follow the source; the clear input and the
// pass mode are this design's own.
module fast_alu
  import fast_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    active,    // this ALU closes a word loop
  input  alu_op_e op,
  input  logic    carry_clr, // zero the carry latch
  input  logic    shift_en,  // one shift step
  input  logic    lsb_in,    // bit leaving the LSB cell of the word
  input  logic    operand,   // external addend bit of this step
  output logic    out,       // bit returned to the MSB end
  output logic    carry      // current carry-in (for observation)
);

  logic cin_q;
  logic sum, cout;

  always_comb begin
    sum  = lsb_in ^ operand ^ cin_q;
    cout = (lsb_in & operand) | (lsb_in & cin_q) | (operand & cin_q);
    if (active && op == ALU_ADD) out = sum;
    else                         out = lsb_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                              cin_q <= 1'b0;
    else if (carry_clr || !active)           cin_q <= 1'b0;
    else if (shift_en && op == ALU_ADD)      cin_q <= cout;
  end

  assign carry = cin_q;

endmodule

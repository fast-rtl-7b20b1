// fast_route_unit: the word-configuration switch between two word segments
// of a FAST row.
//
// A row is cut into segments of SEG_W cells; a routing unit sits between the
// LSB cell of the left segment and the MSB cell of the right one. Besides the
// shift line, a return line runs right-to-left along the row and carries the
// output of the ALU that closes the current word back to that word's MSB cell.
//
//   join = 0 (separate words, "2 x 8 bit" in the 16-column example):
//     the left segment is a word of its own; its ALU output is sent back on
//     the return line (ret_out), and the right segment's head cell takes the
//     return line arriving from the right (ret_in).
//   join = 1 (one wide word, "1 x 16 bit"):
//     the left segment's LSB feeds the right segment's MSB directly, and the
//     return line passes straight through; the left ALU is idle.
//
// Purely combinational. Which line goes where follows the two switch
// settings drawn for the routing unit; the return-line formulation is this
// design's own reading of that drawing.
module fast_route_unit (
  input  logic join_seg,   // 1: connect the two segments into one word
  input  logic left_lsb,   // bit leaving the left segment's LSB cell
  input  logic left_alu,   // output of the left segment's ALU
  input  logic ret_in,     // return line from the right
  output logic to_right,   // shift input of the right segment's MSB cell
  output logic ret_out,    // return line towards the left
  output logic left_active // the left segment's ALU closes a word
);

  always_comb begin
    if (join_seg) begin
      to_right = left_lsb;
      ret_out  = ret_in;
    end else begin
      to_right = ret_in;
      ret_out  = left_alu;
    end
    left_active = !join_seg;
  end

endmodule

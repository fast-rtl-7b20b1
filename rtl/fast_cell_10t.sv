// fast_cell_10t: behavioural model (not for synthesis) of the 10-transistor
// shiftable SRAM cell, at the level of its switch phases.
//
// The cell is two inverters that normally form a closed loop (6T SRAM cell)
// plus three switches: phi2 between the first inverter's output and the
// second inverter's input, phi2d between the second inverter's output and the
// first inverter's input, and a transmission gate phi1 from the left
// neighbour's output to this cell's first-inverter input. Node names here:
//   a_in : input of the first inverter (driven by phi1 or phi2d)
//   x    : input of the second inverter, a dynamic node that keeps its charge
//          while phi2 is open
//   out  = ~x, the cell output that drives the right neighbour.
// One shift step is phase 1 (phi1: a_in takes the left neighbour's output,
// which is stable because the neighbour's x is floating), phase 2 (phi2: x
// takes ~a_in, the new bit reaches the output) and phase 3 (phi2d: the loop
// closes and the bit is restored). Only one cell is crossed per step because
// phi1 and phi2 never overlap; if they did, the bit would race through the
// row. A write (wl & we) forces both nodes from the bitline pair.
//
// Nodes are modelled as latches on purpose: they are the charge-holding nodes
// of the circuit, and a latch is what a synthesis tool would report. Lint
// reports a circular path a_in -> x -> a_in: it is the cell's own inverter
// loop, closed when phi2 and phi2d are both on, and it is kept because the
// cell is that loop. Leakage,
// analog levels and the noise margin are not modelled. The switch topology
// and the phase order follow the source; node names are this model's own.
module fast_cell_10t (
  input  logic phi1,
  input  logic phi2,
  input  logic phi2d,
  input  logic wl,
  input  logic we,
  input  logic bl,        // write data (BL; BLB is its complement)
  input  logic shift_in,  // left neighbour's output, through the phi1 gate
  output logic q,         // stored bit as seen on BL during a read
  output logic shift_out  // this cell's output towards the right neighbour
);

  logic a_in;
  logic x;

  always_latch begin
    if (wl && we)    a_in = bl;
    else if (phi1)   a_in = shift_in;
    else if (phi2d)  a_in = ~x;
  end

  always_latch begin
    if (wl && we)    x = ~bl;
    else if (phi2)   x = ~a_in;
  end

  assign shift_out = ~x;
  assign q         = ~x;

endmodule

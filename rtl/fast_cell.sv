// fast_cell: one shiftable SRAM cell of the FAST array, at register level.
//
// The circuit cell is a 6T SRAM cell plus a transmission gate to the right
// neighbour (phi1) and two feedback switches (phi2, phi2d) that open and close
// the cross-coupled inverter loop. One three-phase sequence moves the bit of
// every cell one place to the right at the same time, like a shift register
// made of latches. Here the whole sequence is one clock edge: when shift_en is
// high (phase 1 of phase_gen) the cell takes shift_in, the bit of its left
// neighbour. When wl and we are high the cell takes the bitline value, as an
// ordinary SRAM write. The two never coincide; a write wins if they do.
//
// The stored value is read through q (the bitline side is modelled in
// fast_array). The cell has no reset, like an SRAM cell. The phase-level
// behaviour of the circuit is not modelled here; this is this design's
// digital abstraction of the cell.
module fast_cell (
  input  logic clk,
  input  logic wl,        // wordline of this row
  input  logic we,        // bitline write drivers enabled
  input  logic bl,        // write data on the bitline pair
  input  logic shift_en,  // one shift step
  input  logic shift_in,  // bit from the left neighbour (or loop return)
  output logic q          // stored bit
);

  logic bit_q;

  always_ff @(posedge clk) begin
    if (wl && we)    bit_q <= bl;
    else if (shift_en) bit_q <= shift_in;
  end

  assign q = bit_q;

endmodule

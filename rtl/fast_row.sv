// fast_row: one row of the FAST array: COLS shiftable cells, one 1-bit ALU per
// word segment and a routing unit between neighbouring segments.
//
// Cell 0 is the leftmost (MSB) cell and cell COLS-1 the rightmost (LSB) cell;
// as a data word, cell i holds bit COLS-1-i. On a shift step every cell takes
// the bit of its left neighbour, so the row shifts right. The bit leaving the
// LSB end of a word passes through that word's ALU and re-enters at the word's
// MSB cell, so the row is a cyclic shifter with a bit-serial ALU in the loop:
// q steps add a q-bit operand to the word and leave it in place.
//
// The row is split into NSEG = COLS/SEG_W segments. Segment s holds cells
// s*SEG_W .. s*SEG_W+SEG_W-1 and has ALU s at its LSB end. join_seg[b] joins
// segment b to segment b+1 through routing unit b, making one wider word; the
// ALU of the last segment of each word does the work, the others pass. With
// the defaults (16 columns, 8-cell segments) join_seg=0 gives two 8-bit words
// and join_seg=1 one 16-bit word.
//
// Timing: writes and shifts take effect on the clock edge where we&wl or
// shift_en is high; q shows the stored bits. operand[s] is the addend bit for
// the word whose last segment is s, valid in the cycle of shift_en.
module fast_row
  import fast_pkg::*;
#(
  parameter int COLS  = 16,
  parameter int SEG_W = 8,
  localparam int NSEG = COLS / SEG_W,
  localparam int JW   = (NSEG > 1) ? NSEG - 1 : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            wl,         // wordline
  input  logic            we,         // write enable (bitline drivers)
  input  logic [COLS-1:0] wdata,      // bitline write data
  output logic [COLS-1:0] q,          // stored word
  input  logic [JW-1:0]   join_seg,   // routing-unit settings
  input  logic            shift_en,   // one shift step
  input  logic            carry_clr,  // clear all carry latches
  input  alu_op_e         op,
  input  logic [NSEG-1:0] operand     // addend bit per segment ALU
);

  logic [COLS-1:0] cell_q;     // cell_q[i] = stored bit of cell i
  logic [COLS-1:0] cell_in;    // shift input of cell i
  logic [NSEG-1:0] alu_out;
  logic [NSEG-1:0] alu_active;
  logic [NSEG-1:0] ret;        // return line entering segment s from the right
  logic [NSEG-1:0] head_in;    // shift input of the MSB cell of segment s

  // Cells.
  for (genvar i = 0; i < COLS; i++) begin : g_cell
    fast_cell u_cell (
      .clk      (clk),
      .wl       (wl),
      .we       (we),
      .bl       (wdata[COLS-1-i]),
      .shift_en (shift_en),
      .shift_in (cell_in[i]),
      .q        (cell_q[i])
    );
    assign q[COLS-1-i] = cell_q[i];
    if (i % SEG_W != 0) begin : g_chain
      assign cell_in[i] = cell_q[i-1];
    end else begin : g_head
      assign cell_in[i] = head_in[i / SEG_W];
    end
  end

  // ALUs, one at the LSB end of each segment.
  for (genvar s = 0; s < NSEG; s++) begin : g_alu
    fast_alu u_alu (
      .clk       (clk),
      .rst_n     (rst_n),
      .active    (alu_active[s]),
      .op        (op),
      .carry_clr (carry_clr),
      .shift_en  (shift_en),
      .lsb_in    (cell_q[s*SEG_W + SEG_W - 1]),
      .operand   (operand[s]),
      .out       (alu_out[s]),
      .carry     ()
    );
  end

  // The last segment's ALU always closes a word; its output starts the
  // return line.
  assign alu_active[NSEG-1] = 1'b1;
  assign ret[NSEG-1]        = alu_out[NSEG-1];
  assign head_in[0]         = ret[0];

  // Routing units between segments b and b+1.
  for (genvar b = 0; b < NSEG - 1; b++) begin : g_route
    fast_route_unit u_route (
      .join_seg    (join_seg[b]),
      .left_lsb    (cell_q[b*SEG_W + SEG_W - 1]),
      .left_alu    (alu_out[b]),
      .ret_in      (ret[b+1]),
      .to_right    (head_in[b+1]),
      .ret_out     (ret[b]),
      .left_active (alu_active[b])
    );
  end

  initial begin
    assert (COLS % SEG_W == 0) else $error("COLS must be a multiple of SEG_W");
  end

endmodule

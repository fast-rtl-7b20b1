// fast_array: the N x M FAST SRAM array, N = ROWS rows of M = COLS shiftable
// cells, each row with its own 1-bit ALUs (see fast_row).
//
// Two kinds of access share the cells:
//  * Conventional access, one row at a time, through the bitlines. A write
//    drives wdata onto all bitlines and the selected wordline stores it. A
//    read selects one wordline; each column's bitline then carries the bit
//    of the selected row, and the sense amplifiers latch it into rdata on the
//    clock edge where rd_en is high (rdata is valid the next cycle). The
//    bitline and sense amplifier are analog; their logical result is written
//    here as an AND-OR over the rows.
//  * Concurrent shift and compute: shift_en, op, carry_clr and join_seg go to
//    every row at once, so all ROWS rows shift and add in the same step.
//    operand[r][s] is the addend bit of row r for segment ALU s.
//
// The array organisation follows the source; the read-port latch is this
// design's choice.
module fast_array
  import fast_pkg::*;
#(
  parameter int ROWS  = 128,
  parameter int COLS  = 16,
  parameter int SEG_W = 8,
  localparam int NSEG = COLS / SEG_W,
  localparam int JW   = (NSEG > 1) ? NSEG - 1 : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [ROWS-1:0]            wl,        // one-hot wordlines
  input  logic                       we,
  input  logic [COLS-1:0]            wdata,
  input  logic                       rd_en,
  output logic [COLS-1:0]            rdata,
  input  logic [JW-1:0]              join_seg,
  input  logic                       shift_en,
  input  logic                       carry_clr,
  input  alu_op_e                    op,
  input  logic [ROWS-1:0][NSEG-1:0]  operand
);

  logic [ROWS-1:0][COLS-1:0] row_q;
  logic [COLS-1:0]           bitline;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    fast_row #(.COLS(COLS), .SEG_W(SEG_W)) u_row (
      .clk       (clk),
      .rst_n     (rst_n),
      .wl        (wl[r]),
      .we        (we),
      .wdata     (wdata),
      .q         (row_q[r]),
      .join_seg  (join_seg),
      .shift_en  (shift_en),
      .carry_clr (carry_clr),
      .op        (op),
      .operand   (operand[r])
    );
  end

  // Bitlines: the selected row's bits.
  always_comb begin
    bitline = '0;
    for (int r = 0; r < ROWS; r++) begin
      bitline |= row_q[r] & {COLS{wl[r]}};
    end
  end

  // Sense amplifier output latch.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rdata <= '0;
    else if (rd_en) rdata <= bitline;
  end

endmodule

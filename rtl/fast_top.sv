// fast_top: the FAST SRAM macro, 128 rows x 16 columns by default.
//
// A FAST macro is an SRAM array in which every row can be cyclically shifted
// to the right in place, all rows at once, through a 1-bit ALU at the end of
// each row. Feeding an addend bit into every ALU on each of q shift steps
// adds a q-bit number to every row concurrently and writes the result back,
// so a batch update of all rows costs q steps instead of one read, compute
// and write per row. The array still offers ordinary one-row reads and
// writes.
//
// Blocks: ctrl_decoder (host instructions), phase_gen (phi1/phi2/phi2d for
// each shift step), row_decoder (wordlines) and fast_array (cells, ALUs,
// routing units, column read logic).
//
// Host interface: see ctrl_decoder. Timing: WRITE and READ take one cycle
// each (read data valid the next cycle); ADD and ROTATE take one cycle plus
// 5 cycles per shift step, with done pulsing in the last. phases shows the
// shift control signals that the circuit array would receive; shift_step
// pulses once per step, when the host's per-row operand bits are sampled.
module fast_top
  import fast_pkg::*;
#(
  parameter int ROWS  = 128,
  parameter int COLS  = 16,
  parameter int SEG_W = 8,
  localparam int NSEG   = COLS / SEG_W,
  localparam int ADDR_W = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int STEP_W = $clog2(COLS) + 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      instr_valid,
  output logic                      instr_ready,
  input  cmd_e                      instr_cmd,
  input  logic [ADDR_W-1:0]         instr_addr,
  input  logic [COLS-1:0]           instr_data,
  input  logic [STEP_W-1:0]         instr_steps,
  input  logic                      instr_ext,
  input  logic [ROWS-1:0][NSEG-1:0] ext_operand,
  output logic [STEP_W-1:0]         step_idx,
  output logic                      shift_step,
  output logic [COLS-1:0]           rd_data,
  output logic                      rd_valid,
  output logic                      busy,
  output logic                      done,
  output phase_t                    phases
);

  localparam int JW = (NSEG > 1) ? NSEG - 1 : 1;

  logic                      row_en, we, rd_en, carry_clr;
  logic [ADDR_W-1:0]         row_addr;
  logic [COLS-1:0]           wdata, rdata;
  logic [JW-1:0]             join_seg;
  alu_op_e                   op;
  logic [ROWS-1:0][NSEG-1:0] operand;
  logic [ROWS-1:0]           wl;
  logic                      pg_start, pg_done, pg_busy, shift_en;
  logic [STEP_W-1:0]         pg_nsteps;

  ctrl_decoder #(.ROWS(ROWS), .COLS(COLS), .SEG_W(SEG_W)) u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .instr_valid (instr_valid),
    .instr_ready (instr_ready),
    .instr_cmd   (instr_cmd),
    .instr_addr  (instr_addr),
    .instr_data  (instr_data),
    .instr_steps (instr_steps),
    .instr_ext   (instr_ext),
    .ext_operand (ext_operand),
    .step_idx    (step_idx),
    .rd_data     (rd_data),
    .rd_valid    (rd_valid),
    .busy        (busy),
    .done        (done),
    .row_en      (row_en),
    .row_addr    (row_addr),
    .we          (we),
    .wdata       (wdata),
    .rd_en       (rd_en),
    .rdata       (rdata),
    .join_seg    (join_seg),
    .carry_clr   (carry_clr),
    .op          (op),
    .operand     (operand),
    .pg_start    (pg_start),
    .pg_nsteps   (pg_nsteps),
    .pg_shift_en (shift_en),
    .pg_done     (pg_done)
  );

  phase_gen #(.STEP_W(STEP_W)) u_phase (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (pg_start),
    .nsteps   (pg_nsteps),
    .phases   (phases),
    .shift_en (shift_en),
    .busy     (pg_busy),
    .done     (pg_done)
  );

  row_decoder #(.ROWS(ROWS)) u_rowdec (
    .en   (row_en),
    .addr (row_addr),
    .wl   (wl)
  );

  fast_array #(.ROWS(ROWS), .COLS(COLS), .SEG_W(SEG_W)) u_array (
    .clk       (clk),
    .rst_n     (rst_n),
    .wl        (wl),
    .we        (we),
    .wdata     (wdata),
    .rd_en     (rd_en),
    .rdata     (rdata),
    .join_seg  (join_seg),
    .shift_en  (shift_en),
    .carry_clr (carry_clr),
    .op        (op),
    .operand   (operand)
  );

  assign shift_step = shift_en;

  // The controller and the phase generator agree on when a run is active.
  a_busy_match: assert property (@(posedge clk) disable iff (!rst_n)
    pg_busy |-> busy);

endmodule

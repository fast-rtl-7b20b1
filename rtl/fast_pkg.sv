// fast_pkg: types shared by the FAST (fully-concurrent access, shift-based)
// SRAM macro.
//
// The macro is an SRAM array whose cells can each pass their bit to the right
// neighbour, so every row is a cyclic shift register closed through a 1-bit
// ALU. The host talks to it through a small instruction port; the opcode set
// below and its encoding are this design's own (the source only says that a
// control decoder interfaces to an external CPU or FPGA).
package fast_pkg;

  // Host instructions.
  //   CMD_WRITE  : conventional write of one row            (addr, data)
  //   CMD_READ   : conventional read of one row             (addr)
  //   CMD_CONFIG : set the word-joining configuration      (data[NSEG-2:0])
  //   CMD_ADD    : all rows add an operand, bit-serially    (data, steps, ext)
  //   CMD_ROTATE : all rows rotate right by 'steps' cells   (steps)
  typedef enum logic [2:0] {
    CMD_NOP    = 3'd0,
    CMD_WRITE  = 3'd1,
    CMD_READ   = 3'd2,
    CMD_CONFIG = 3'd3,
    CMD_ADD    = 3'd4,
    CMD_ROTATE = 3'd5
  } cmd_e;

  // Operation of the per-row 1-bit ALU.
  typedef enum logic {
    ALU_PASS = 1'b0,   // bit goes around the loop unchanged (plain shift)
    ALU_ADD  = 1'b1    // full adder with carry latch
  } alu_op_e;

  // The three shift control signals of the in-cell shifter.
  //   phi1  : inter-cell transmission gate (neighbour -> neighbour)
  //   phi2  : first intra-cell feedback switch
  //   phi2d : phi2 delayed, second intra-cell feedback switch
  typedef struct packed {
    logic phi1;
    logic phi2;
    logic phi2d;
  } phase_t;

  // Sub-cycles of one shift step (see phase_gen).
  typedef enum logic [2:0] {
    PH_HOLD  = 3'd0,   // idle: phi2 = phi2d = 1, cells are closed latches
    PH_DEAD0 = 3'd1,   // phi2 falls; phi2d still high (delayed copy)
    PH_P1    = 3'd2,   // phase 1: phi1 only, data moves to the right
    PH_DEAD1 = 3'd3,   // all off: non-overlap between phi1 and phi2
    PH_P2    = 3'd4,   // phase 2: phi2 on, phi2d still off
    PH_P3    = 3'd5    // phase 3: phi2 and phi2d on, loop closed
  } phase_state_e;

endpackage

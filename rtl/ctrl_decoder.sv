// ctrl_decoder: the control decoder of the FAST macro, the interface between
// the host (CPU or FPGA) and the array.
//
// It accepts one instruction per handshake (instr_valid & instr_ready) and
// drives the array:
//   CMD_WRITE  : selects row instr_addr and writes instr_data; 1 cycle.
//   CMD_READ   : selects row instr_addr; rd_data is valid (rd_valid) in the
//                next cycle; 1 cycle.
//   CMD_CONFIG : stores the routing-unit settings from instr_data[JW-1:0]
//                (bit b = 1 joins word segment b to segment b+1).
//   CMD_ADD    : all rows add an operand, bit-serially over instr_steps shift
//                steps, with the carry latches cleared first. With
//                instr_ext = 0 the operand is instr_data, the same for every
//                row, in the row's bit layout (in 2 x 8-bit mode
//                instr_data[15:8] goes to the left word and [7:0] to the
//                right word). With instr_ext = 1 each row takes its own bit
//                from ext_operand[row][seg] during every step; step_idx says
//                which operand bit (0 = LSB) the host must present.
//   CMD_ROTATE : all rows rotate right by instr_steps cells, ALUs passing.
// instr_steps should equal the word width for an addition (8 or 16 with the
// defaults); the word is then back in place and holds the sum modulo 2^q.
// ADD and ROTATE keep instr_ready low while the phase generator runs
// (5 cycles per step) and pulse done in its last cycle.
//
// Which instructions exist and how they are encoded is this design's own;
// the source gives the decoder's role and the per-row control lines, not its
// insides.
module ctrl_decoder
  import fast_pkg::*;
#(
  parameter int ROWS   = 128,
  parameter int COLS   = 16,
  parameter int SEG_W  = 8,
  localparam int NSEG   = COLS / SEG_W,
  localparam int JW     = (NSEG > 1) ? NSEG - 1 : 1,
  localparam int ADDR_W = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int STEP_W = $clog2(COLS) + 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // host side
  input  logic                      instr_valid,
  output logic                      instr_ready,
  input  cmd_e                      instr_cmd,
  input  logic [ADDR_W-1:0]         instr_addr,
  input  logic [COLS-1:0]           instr_data,
  input  logic [STEP_W-1:0]         instr_steps,
  input  logic                      instr_ext,
  input  logic [ROWS-1:0][NSEG-1:0] ext_operand,
  output logic [STEP_W-1:0]         step_idx,
  output logic [COLS-1:0]           rd_data,
  output logic                      rd_valid,
  output logic                      busy,
  output logic                      done,
  // array side
  output logic                      row_en,
  output logic [ADDR_W-1:0]         row_addr,
  output logic                      we,
  output logic [COLS-1:0]           wdata,
  output logic                      rd_en,
  input  logic [COLS-1:0]           rdata,
  output logic [JW-1:0]             join_seg,
  output logic                      carry_clr,
  output alu_op_e                   op,
  output logic [ROWS-1:0][NSEG-1:0] operand,
  // phase generator side
  output logic                      pg_start,
  output logic [STEP_W-1:0]         pg_nsteps,
  input  logic                      pg_shift_en,
  input  logic                      pg_done
);

  typedef enum logic {S_IDLE, S_RUN} state_e;

  state_e            state;
  logic [JW-1:0]     join_q;
  alu_op_e           op_q;
  logic [COLS-1:0]   opnd_q;
  logic              ext_q;
  logic [STEP_W-1:0] step_q;
  logic              rd_valid_q;
  logic              accept;

  assign instr_ready = (state == S_IDLE);
  assign accept      = instr_valid && instr_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      join_q     <= '0;
      op_q       <= ALU_PASS;
      opnd_q     <= '0;
      ext_q      <= 1'b0;
      step_q     <= '0;
      rd_valid_q <= 1'b0;
    end else begin
      rd_valid_q <= accept && (instr_cmd == CMD_READ);
      unique case (state)
        S_IDLE: if (accept) begin
          unique case (instr_cmd)
            CMD_CONFIG: join_q <= instr_data[JW-1:0];
            CMD_ADD, CMD_ROTATE: begin
              state  <= S_RUN;
              op_q   <= (instr_cmd == CMD_ADD) ? ALU_ADD : ALU_PASS;
              opnd_q <= instr_data;
              ext_q  <= instr_ext;
              step_q <= '0;
            end
            default: ;
          endcase
        end
        S_RUN: begin
          if (pg_shift_en) step_q <= step_q + 1'b1;
          if (pg_done)     state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Conventional access and run start, straight from the accepted
  // instruction.
  always_comb begin
    row_en    = accept && (instr_cmd == CMD_WRITE || instr_cmd == CMD_READ);
    row_addr  = instr_addr;
    we        = accept && (instr_cmd == CMD_WRITE);
    wdata     = instr_data;
    rd_en     = accept && (instr_cmd == CMD_READ);
    pg_start  = accept && (instr_cmd == CMD_ADD || instr_cmd == CMD_ROTATE);
    pg_nsteps = instr_steps;
    carry_clr = pg_start;
  end

  // Per-row operand bits of the current step. The word whose last segment
  // is s has its LSB at data bit (NSEG-1-s)*SEG_W.
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      for (int s = 0; s < NSEG; s++) begin
        if (ext_q) begin
          operand[r][s] = ext_operand[r][s];
        end else if (int'(step_q) + (NSEG-1-s)*SEG_W < COLS) begin
          operand[r][s] = opnd_q[int'(step_q) + (NSEG-1-s)*SEG_W];
        end else begin
          operand[r][s] = 1'b0;
        end
      end
    end
  end

  assign join_seg = join_q;
  assign op       = op_q;
  assign step_idx = step_q;
  assign rd_data  = rdata;
  assign rd_valid = rd_valid_q;
  assign busy     = (state == S_RUN);
  assign done     = (state == S_RUN) && pg_done;

  // Host handshake: an instruction held while not ready must not change.
  a_instr_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (instr_valid && !instr_ready) |=> $stable(instr_cmd) || !instr_valid);

endmodule

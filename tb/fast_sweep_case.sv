// fast_sweep_case: one configuration of the macro for the size sweep.
//
// Instantiates fast_top with the given ROWS, COLS and SEG_W and, when start
// rises, runs a batch update for each word width in WIDTHS: it fills every
// row with random data, joins segments into words of that width, adds a
// random broadcast operand to every word of every row, reads every row back
// against a reference, and records how many cycles the addition took (from
// the accepting cycle to done). Results come out on ports: the number of
// checks and failures, and the measured cycles per width.
module fast_sweep_case
  import fast_pkg::*;
#(
  parameter int ROWS   = 32,
  parameter int COLS   = 16,
  parameter int SEG_W  = 4,
  parameter int NW     = 3,
  parameter int WIDTHS [4] = '{4, 8, 16, 0}   // first NW entries used
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   cycles [4]
);

  localparam int NSEG   = COLS / SEG_W;
  localparam int ADDR_W = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int STEP_W = $clog2(COLS) + 1;

  logic                      instr_valid, instr_ready, instr_ext;
  cmd_e                      instr_cmd;
  logic [ADDR_W-1:0]         instr_addr;
  logic [COLS-1:0]           instr_data, rd_data;
  logic [STEP_W-1:0]         instr_steps, step_idx;
  logic [ROWS-1:0][NSEG-1:0] ext_operand;
  logic                      shift_step, rd_valid, busy, done;
  phase_t                    phases;

  fast_top #(.ROWS(ROWS), .COLS(COLS), .SEG_W(SEG_W)) u_top (.*);

  assign ext_operand = '0;

  logic [COLS-1:0] model [ROWS];

  function automatic logic [COLS-1:0] rand_word();
    logic [COLS-1:0] v;
    for (int i = 0; i < COLS; i += 32) v[i +: 32] = 32'($urandom);
    return v;
  endfunction

  // Word-wise sum of a and b for words of w bits (word 0 at the MSB end).
  function automatic logic [COLS-1:0] add_words(input logic [COLS-1:0] a,
                                                input logic [COLS-1:0] b, input int w);
    logic [COLS-1:0] r = '0;
    for (int lo = 0; lo < COLS; lo += w) begin
      logic c = 1'b0;
      for (int i = 0; i < w; i++) begin
        r[lo+i] = a[lo+i] ^ b[lo+i] ^ c;
        c = (a[lo+i] & b[lo+i]) | (a[lo+i] & c) | (b[lo+i] & c);
      end
    end
    return r;
  endfunction

  task automatic issue(input cmd_e c, input int a, input logic [COLS-1:0] d, input int steps);
    while (!instr_ready) @(negedge clk);
    instr_valid = 1; instr_cmd = c; instr_addr = ADDR_W'(a); instr_data = d;
    instr_steps = STEP_W'(steps);
    @(negedge clk);
    instr_valid = 0; instr_cmd = CMD_NOP;
  endtask

  initial begin
    logic [COLS-1:0] opnd, joins;
    int cyc;
    instr_valid = 0; instr_cmd = CMD_NOP; instr_addr = '0; instr_data = '0;
    instr_steps = '0; instr_ext = 0;
    finished = 0; checks = 0; failures = 0;
    for (int i = 0; i < 4; i++) cycles[i] = 0;
    @(posedge start);
    @(negedge clk);
    for (int wi = 0; wi < NW; wi++) begin
      for (int r = 0; r < ROWS; r++) begin
        model[r] = rand_word();
        issue(CMD_WRITE, r, model[r], 0);
      end
      // join segment b to b+1 unless a word boundary lies between them
      joins = '0;
      for (int b = 0; b < NSEG - 1; b++) joins[b] = (((b + 1) * SEG_W) % WIDTHS[wi]) != 0;
      issue(CMD_CONFIG, 0, joins, 0);
      opnd = rand_word();
      for (int r = 0; r < ROWS; r++) model[r] = add_words(model[r], opnd, WIDTHS[wi]);
      while (!instr_ready) @(negedge clk);
      instr_valid = 1; instr_cmd = CMD_ADD; instr_data = opnd;
      instr_steps = STEP_W'(WIDTHS[wi]); instr_ext = 0;
      @(negedge clk);
      instr_valid = 0; instr_cmd = CMD_NOP;
      cyc = 1;
      while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
      cycles[wi] = cyc;
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) begin
        issue(CMD_READ, r, '0, 0);
        #1;
        checks++;
        if (!rd_valid || rd_data !== model[r]) begin
          failures++;
          $display("FAIL rows=%0d cols=%0d width=%0d row %0d: %h expected %h",
                   ROWS, COLS, WIDTHS[wi], r, rd_data, model[r]);
        end
      end
    end
    finished = 1;
  end

endmodule

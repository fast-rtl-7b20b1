// tb_fast_top: end-to-end test of the FAST macro at its default size
// (128 rows x 16 columns, two 8-bit words per row or one 16-bit word).
//
// Acting as the host, it fills the array with random data, reads it back,
// and runs batch updates on all rows at once against a reference model:
// 2 x 8-bit and 1 x 16-bit additions of a broadcast operand, additions with
// a different operand per row supplied bit by bit, and rotations. Every row
// is read back after each operation. Each ADD/ROTATE of q steps must raise
// done exactly 5*q cycles after the cycle that accepted it, with exactly q
// shift steps, whatever the number of rows. It counts how often each mechanism happened and fails any
// that never did: conventional write and read, both word configurations,
// broadcast and per-row operands, plain rotation, a carry crossing the byte
// boundary in 16-bit mode, a carry stopped at the word boundary in 8-bit
// mode, and wrap-around of a sum.
module tb_fast_top;
  import fast_pkg::*;
  localparam int ROWS = 128, COLS = 16, NSEG = 2;
  logic                      clk = 1'b0;
  logic                      rst_n, instr_valid, instr_ready, instr_ext;
  cmd_e                      instr_cmd;
  logic [6:0]                instr_addr;
  logic [COLS-1:0]           instr_data, rd_data;
  logic [4:0]                instr_steps, step_idx;
  logic [ROWS-1:0][NSEG-1:0] ext_operand;
  logic                      shift_step, rd_valid, busy, done;
  phase_t                    phases;

  logic [COLS-1:0] model   [ROWS];
  logic [COLS-1:0] per_row [ROWS];
  bit              joined;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_write, n_read, n_split, n_join, n_add8, n_add16, n_ext, n_rot;
  int n_cross, n_stop, n_wrap;

  fast_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Host supplies its per-row operand bits for the step the macro is on.
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      ext_operand[r][1] = per_row[r][int'(step_idx) % 16];
      ext_operand[r][0] = (int'(step_idx) + 8 < 16) ? per_row[r][int'(step_idx) + 8] : 1'b0;
    end
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic issue(input cmd_e c, input logic [6:0] a, input logic [15:0] d,
                       input int steps, input bit ext);
    while (!instr_ready) @(negedge clk);
    instr_valid = 1; instr_cmd = c; instr_addr = a; instr_data = d;
    instr_steps = 5'(steps); instr_ext = ext;
    @(negedge clk);
    instr_valid = 0; instr_cmd = CMD_NOP; instr_ext = 0;
  endtask

  task automatic read_all(input string what);
    for (int r = 0; r < ROWS; r++) begin
      issue(CMD_READ, 7'(r), 16'h0, 0, 0);
      #1;
      checks++;
      if (!rd_valid || rd_data !== model[r]) begin
        failures++;
        $display("FAIL %s: row %0d read %h expected %h", what, r, rd_data, model[r]);
      end
      n_read++;
    end
  endtask

  task automatic configure(input bit j);
    issue(CMD_CONFIG, 7'd0, {15'd0, j}, 0, 0);
    joined = j;
    if (j) n_join++; else n_split++;
  endtask

  // ADD or ROTATE over q steps, timed from the accept cycle.
  task automatic run(input cmd_e c, input int q, input logic [15:0] d, input bit ext);
    int cyc = 0, steps_seen = 0;
    while (!instr_ready) @(negedge clk);
    instr_valid = 1; instr_cmd = c; instr_data = d; instr_steps = 5'(q); instr_ext = ext;
    @(negedge clk);
    instr_valid = 0; instr_cmd = CMD_NOP; instr_ext = 0;
    cyc = 1;
    while (!done && cyc < 1000) begin
      if (shift_step) steps_seen++;
      @(negedge clk);
      cyc++;
    end
    check(cyc == 5 * q, $sformatf("q=%0d: done %0d cycles after accept, expected %0d", q, cyc, 5 * q));
    check(steps_seen == q, $sformatf("q=%0d gave %0d shift steps", q, steps_seen));
    @(negedge clk);
  endtask

  task automatic add(input int q, input logic [15:0] d, input bit ext);
    logic [15:0] b;
    for (int r = 0; r < ROWS; r++) begin
      b = ext ? per_row[r] : d;
      if (joined) begin
        if (17'(model[r]) + 17'(b) > 17'hffff) n_wrap++;
        if ((9'(model[r][7:0]) + 9'(b[7:0])) > 9'hff) n_cross++;
        model[r] = model[r] + b;
      end else begin
        if ((9'(model[r][7:0]) + 9'(b[7:0])) > 9'hff) begin n_stop++; n_wrap++; end
        if ((9'(model[r][15:8]) + 9'(b[15:8])) > 9'hff) n_wrap++;
        model[r] = {8'(model[r][15:8] + b[15:8]), 8'(model[r][7:0] + b[7:0])};
      end
    end
    run(CMD_ADD, q, d, ext);
    if (ext) n_ext++;
    if (q == 8) n_add8++; else n_add16++;
  endtask

  initial begin
    rst_n = 0; instr_valid = 0; instr_cmd = CMD_NOP; instr_addr = 0; instr_data = 0;
    instr_steps = 0; instr_ext = 0; joined = 0;
    for (int r = 0; r < ROWS; r++) per_row[r] = '0;
    {n_write, n_read, n_split, n_join, n_add8, n_add16, n_ext, n_rot} = '0;
    {n_cross, n_stop, n_wrap} = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // Fill and read back.
    for (int r = 0; r < ROWS; r++) begin
      model[r] = 16'($urandom);
      issue(CMD_WRITE, 7'(r), model[r], 0, 0);
      n_write++;
    end
    read_all("write");

    // Two 8-bit words per row, broadcast operand.
    configure(1'b0);
    add(8, 16'hc3a7, 0);
    read_all("add 2x8 broadcast");

    // Two 8-bit words per row, per-row operands.
    for (int r = 0; r < ROWS; r++) per_row[r] = 16'($urandom);
    add(8, 16'h0, 1);
    read_all("add 2x8 per-row");

    // One 16-bit word per row.
    configure(1'b1);
    add(16, 16'h81ff, 0);
    read_all("add 1x16 broadcast");
    for (int r = 0; r < ROWS; r++) per_row[r] = 16'($urandom);
    add(16, 16'h0, 1);
    read_all("add 1x16 per-row");

    // Rotations: 16-bit by 3, then 8-bit words by 8 (back in place).
    for (int r = 0; r < ROWS; r++) model[r] = {model[r][2:0], model[r][15:3]};
    run(CMD_ROTATE, 3, 16'h0, 0);
    n_rot++;
    read_all("rotate 16 by 3");
    configure(1'b0);
    run(CMD_ROTATE, 8, 16'h0, 0);
    n_rot++;
    read_all("rotate 2x8 by 8");

    check(n_write  > 0, "mechanism: write");
    check(n_read   > 0, "mechanism: read");
    check(n_split  > 0, "mechanism: 2x8 configuration");
    check(n_join   > 0, "mechanism: 1x16 configuration");
    check(n_add8   > 0, "mechanism: 8-bit concurrent add");
    check(n_add16  > 0, "mechanism: 16-bit concurrent add");
    check(n_ext    > 0, "mechanism: per-row operands");
    check(n_rot    > 0, "mechanism: rotation");
    check(n_cross  > 0, "mechanism: carry across byte boundary");
    check(n_stop   > 0, "mechanism: carry stopped at word boundary");
    check(n_wrap   > 0, "mechanism: sum wrap-around");
    $display("mechanisms: write=%0d read=%0d split=%0d join=%0d add8=%0d add16=%0d ext=%0d rotate=%0d cross=%0d stop=%0d wrap=%0d",
             n_write, n_read, n_split, n_join, n_add8, n_add16, n_ext, n_rot, n_cross, n_stop, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

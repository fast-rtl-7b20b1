// tb_ctrl_decoder: self-checking test of the control decoder on its own.
// The testbench plays both the host and the phase generator (it pulses
// pg_shift_en and pg_done itself) and checks the array-side outputs:
// the WRITE/READ strobes and address, read data and its valid one cycle
// later, the CONFIG register, the start of ADD/ROTATE runs (phase generator
// start, step count, carry clear, ALU op), the per-row per-segment operand
// bit of every step in broadcast and in per-row mode, ready/busy/done.
module tb_ctrl_decoder;
  import fast_pkg::*;
  localparam int ROWS = 128, COLS = 16, SEG_W = 8, NSEG = 2;
  logic                      clk = 1'b0;
  logic                      rst_n, instr_valid, instr_ready, instr_ext;
  cmd_e                      instr_cmd;
  logic [6:0]                instr_addr;
  logic [COLS-1:0]           instr_data, rd_data, wdata, rdata;
  logic [4:0]                instr_steps, step_idx, pg_nsteps;
  logic [ROWS-1:0][NSEG-1:0] ext_operand, operand;
  logic                      rd_valid, busy, done, row_en, we, rd_en, carry_clr;
  logic [6:0]                row_addr;
  logic [0:0]                join_seg;
  alu_op_e                   op;
  logic                      pg_start, pg_shift_en, pg_done;
  int checks = 0, failures = 0;

  ctrl_decoder #(.ROWS(ROWS), .COLS(COLS), .SEG_W(SEG_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic idle_host();
    instr_valid = 0; instr_cmd = CMD_NOP; instr_ext = 0;
  endtask

  // Issue ADD or ROTATE and act as the phase generator for n steps.
  task automatic run(input cmd_e c, input int n, input logic [15:0] d,
                     input bit ext, input logic [15:0] per_row [ROWS]);
    instr_valid = 1; instr_cmd = c; instr_data = d; instr_steps = 5'(n);
    instr_ext = ext;
    #1;
    check(instr_ready && pg_start && pg_nsteps == 5'(n) && carry_clr && !we && !rd_en,
          "run start strobes");
    @(negedge clk);
    idle_host();
    check(!instr_ready && busy, "busy during run");
    check(op == ((c == CMD_ADD) ? ALU_ADD : ALU_PASS), "ALU op");
    for (int k = 0; k < n; k++) begin
      // present the host's per-row bits for step k
      for (int r = 0; r < ROWS; r++) begin
        ext_operand[r][1] = per_row[r][k % 16];
        ext_operand[r][0] = (k + 8 < 16) ? per_row[r][k + 8] : 1'b0;
      end
      #1;
      check(step_idx == 5'(k), "step index");
      for (int r = 0; r < ROWS; r += 17) begin
        if (ext) begin
          check(operand[r] == ext_operand[r], $sformatf("ext operand row %0d step %0d", r, k));
        end else begin
          check(operand[r][1] == d[k % 16], $sformatf("broadcast seg1 step %0d", k));
          check(operand[r][0] == ((k + 8 < 16) ? d[k + 8] : 1'b0),
                $sformatf("broadcast seg0 step %0d", k));
        end
      end
      pg_shift_en = 1;
      pg_done = (k == n - 1);
      #1;
      check(done == pg_done, "done follows the phase generator's last cycle");
      @(negedge clk);
      pg_shift_en = 0; pg_done = 0;
    end
    check(instr_ready && !busy, "ready after run");
  endtask

  initial begin
    logic [15:0] per_row [ROWS];
    rst_n = 0; idle_host(); instr_addr = 0; instr_data = 0; instr_steps = 0;
    ext_operand = '0; rdata = 16'h0; pg_shift_en = 0; pg_done = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(instr_ready && !busy && join_seg == 1'b0, "reset state");

    // WRITE
    instr_valid = 1; instr_cmd = CMD_WRITE; instr_addr = 7'd77; instr_data = 16'hbeef;
    #1;
    check(row_en && we && !rd_en && row_addr == 7'd77 && wdata == 16'hbeef && !pg_start,
          "write strobes");
    @(negedge clk);
    idle_host();
    #1 check(!row_en && !we, "write is one cycle");
    // READ
    instr_valid = 1; instr_cmd = CMD_READ; instr_addr = 7'd5;
    #1;
    check(row_en && rd_en && !we && row_addr == 7'd5, "read strobes");
    @(negedge clk);
    idle_host();
    rdata = 16'h1234;
    #1 check(rd_valid && rd_data == 16'h1234, "read data valid next cycle");
    @(negedge clk);
    check(!rd_valid, "read valid is one cycle");
    // CONFIG
    instr_valid = 1; instr_cmd = CMD_CONFIG; instr_data = 16'h0001;
    @(negedge clk);
    idle_host();
    check(join_seg == 1'b1, "config join");
    instr_valid = 1; instr_cmd = CMD_CONFIG; instr_data = 16'h0000;
    @(negedge clk);
    idle_host();
    check(join_seg == 1'b0, "config split");

    for (int r = 0; r < ROWS; r++) per_row[r] = 16'($urandom);
    run(CMD_ADD, 8, 16'ha5c3, 1'b0, per_row);
    run(CMD_ADD, 16, 16'h1f0e, 1'b0, per_row);
    run(CMD_ADD, 8, 16'h0, 1'b1, per_row);
    run(CMD_ROTATE, 3, 16'h0, 1'b0, per_row);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

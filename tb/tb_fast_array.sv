// tb_fast_array: self-checking test of the full 128 x 16 array.
// Writes every row through the wordlines, reads every row back through the
// column read path, then runs concurrent operations on all rows at once
// (2 x 8 additions with a different operand per row, a 1 x 16 addition, a
// rotation) and reads every row again against a reference model.
module tb_fast_array;
  import fast_pkg::*;
  localparam int ROWS = 128, COLS = 16, SEG_W = 8, NSEG = 2;
  logic                       clk = 1'b0;
  logic                       rst_n, we, rd_en, shift_en, carry_clr;
  logic [ROWS-1:0]            wl;
  logic [COLS-1:0]            wdata, rdata;
  logic [0:0]                 join_seg;
  alu_op_e                    op;
  logic [ROWS-1:0][NSEG-1:0]  operand;
  logic [COLS-1:0]            model [ROWS];
  logic [COLS-1:0]            opnd  [ROWS];
  int checks = 0, failures = 0;

  fast_array #(.ROWS(ROWS), .COLS(COLS), .SEG_W(SEG_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_row(input int r, input logic [15:0] d);
    wl = '0; wl[r] = 1'b1; we = 1; wdata = d;
    @(negedge clk);
    wl = '0; we = 0;
  endtask

  task automatic check_all(input string what);
    for (int r = 0; r < ROWS; r++) begin
      wl = '0; wl[r] = 1'b1; rd_en = 1;
      @(negedge clk);
      wl = '0; rd_en = 0;
      checks++;
      if (rdata !== model[r]) begin
        failures++;
        $display("FAIL %s: row %0d read %h expected %h", what, r, rdata, model[r]);
      end
    end
  endtask

  // n steps on all rows, operand of row r from opnd[r] (row layout).
  task automatic steps(input alu_op_e o, input int n);
    op = o; carry_clr = 1;
    @(negedge clk);
    carry_clr = 0;
    for (int k = 0; k < n; k++) begin
      for (int r = 0; r < ROWS; r++) begin
        operand[r][1] = opnd[r][k % 16];
        operand[r][0] = (k + SEG_W < 16) ? opnd[r][k + SEG_W] : 1'b0;
      end
      shift_en = 1;
      @(negedge clk);
      shift_en = 0;
      @(negedge clk);
    end
  endtask

  initial begin
    rst_n = 0; we = 0; rd_en = 0; shift_en = 0; carry_clr = 0; wl = '0;
    wdata = '0; join_seg = 0; op = ALU_PASS; operand = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    for (int r = 0; r < ROWS; r++) begin
      model[r] = 16'($urandom);
      write_row(r, model[r]);
    end
    check_all("write");

    // 2 x 8 additions, per-row operands.
    join_seg = 0;
    for (int r = 0; r < ROWS; r++) begin
      opnd[r] = 16'($urandom);
      model[r] = {8'(model[r][15:8] + opnd[r][15:8]), 8'(model[r][7:0] + opnd[r][7:0])};
    end
    steps(ALU_ADD, 8);
    check_all("add 2x8");

    // 1 x 16 addition.
    join_seg = 1;
    for (int r = 0; r < ROWS; r++) begin
      opnd[r] = 16'($urandom);
      model[r] = model[r] + opnd[r];
    end
    steps(ALU_ADD, 16);
    check_all("add 1x16");

    // Rotate right by 5 as one 16-bit word.
    for (int r = 0; r < ROWS; r++) model[r] = {model[r][4:0], model[r][15:5]};
    steps(ALU_PASS, 5);
    check_all("rotate");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fast_row: self-checking test of one 16-cell row at the default
// configuration (two 8-cell segments with one routing unit).
// Checks, against values computed here:
//  * write/read back;
//  * rotate right by k in 1 x 16 mode (one word) and in 2 x 8 mode (each
//    byte rotates on its own);
//  * bit-serial ADD: two independent 8-bit sums in 2 x 8 mode (no carry
//    crosses the byte boundary) and one 16-bit sum in 1 x 16 mode, each
//    taking exactly q shift steps.
module tb_fast_row;
  import fast_pkg::*;
  localparam int COLS = 16, SEG_W = 8, NSEG = 2;
  logic            clk = 1'b0;
  logic            rst_n, wl, we, shift_en, carry_clr;
  logic [COLS-1:0] wdata, q;
  logic [0:0]      join_seg;
  alu_op_e         op;
  logic [NSEG-1:0] operand;
  int checks = 0, failures = 0;

  fast_row #(.COLS(COLS), .SEG_W(SEG_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write_row(input logic [15:0] d);
    wl = 1; we = 1; wdata = d;
    @(negedge clk);
    wl = 0; we = 0;
  endtask

  // n shift steps; operand bits from opnd in the row layout.
  task automatic steps(input alu_op_e o, input int n, input logic [15:0] opnd);
    op = o; carry_clr = 1;
    @(negedge clk);
    carry_clr = 0;
    for (int k = 0; k < n; k++) begin
      operand[1] = opnd[k % 16];                                 // word ending at segment 1
      operand[0] = (k + SEG_W < 16) ? opnd[k + SEG_W] : 1'b0;    // word ending at segment 0
      shift_en = 1;
      @(negedge clk);
      shift_en = 0;
      @(negedge clk);
    end
  endtask

  function automatic logic [7:0] rotr8(input logic [7:0] v, input int k);
    logic [7:0] r = v;
    for (int i = 0; i < k; i++) r = {r[0], r[7:1]};
    return r;
  endfunction

  function automatic logic [15:0] rotr16(input logic [15:0] v, input int k);
    logic [15:0] r = v;
    for (int i = 0; i < k; i++) r = {r[0], r[15:1]};
    return r;
  endfunction

  initial begin
    logic [15:0] a, b, e;
    int k;
    rst_n = 0; wl = 0; we = 0; wdata = 0; shift_en = 0; carry_clr = 0;
    join_seg = 0; op = ALU_PASS; operand = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    for (int i = 0; i < 40; i++) begin
      a = 16'($urandom);
      write_row(a);
      check(q == a, "write");
      // rotations
      k = 1 + ($urandom % 16);
      join_seg = 1;
      steps(ALU_PASS, k, 16'h0);
      check(q == rotr16(a, k), $sformatf("rotate16 %h by %0d got %h", a, k, q));
      write_row(a);
      join_seg = 0;
      k = 1 + ($urandom % 8);
      steps(ALU_PASS, k, 16'h0);
      e = {rotr8(a[15:8], k), rotr8(a[7:0], k)};
      check(q == e, $sformatf("rotate 2x8 %h by %0d got %h exp %h", a, k, q, e));
      // 2 x 8 addition
      write_row(a);
      b = 16'($urandom);
      join_seg = 0;
      steps(ALU_ADD, 8, b);
      e = {8'(a[15:8] + b[15:8]), 8'(a[7:0] + b[7:0])};
      check(q == e, $sformatf("add 2x8 %h+%h got %h exp %h", a, b, q, e));
      // 1 x 16 addition
      write_row(a);
      join_seg = 1;
      steps(ALU_ADD, 16, b);
      e = a + b;
      check(q == e, $sformatf("add 1x16 %h+%h got %h exp %h", a, b, q, e));
    end
    // A carry that must cross the byte boundary only in 1 x 16 mode.
    write_row(16'h00ff);
    join_seg = 1; steps(ALU_ADD, 16, 16'h0001);
    check(q == 16'h0100, "carry crosses in 1x16");
    write_row(16'h00ff);
    join_seg = 0; steps(ALU_ADD, 8, 16'h0001);
    check(q == 16'h0000, "carry stays in its word in 2x8");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

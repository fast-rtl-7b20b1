// tb_fast_alu: self-checking test of the 1-bit ALU.
// Streams random q-bit words and operands LSB first through the ALU in ADD
// mode and rebuilds the result from the out bits; it must equal a+b mod 2^q.
// Also checks the Fig. 4(b)-style example 5+1 = 6 in 8 bits, pass mode, and
// that an inactive ALU passes bits and keeps no carry.
module tb_fast_alu;
  import fast_pkg::*;
  logic    clk = 1'b0;
  logic    rst_n, active, carry_clr, shift_en, lsb_in, operand, out, carry;
  alu_op_e op;
  int checks = 0, failures = 0;

  fast_alu dut (.*);

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

  // Bit-serial run of q steps; returns the word rebuilt from out.
  task automatic run(input alu_op_e o, input bit act, input int q,
                     input logic [31:0] a, input logic [31:0] b,
                     output logic [31:0] res);
    res = '0;
    op = o; active = act; carry_clr = 1'b1; shift_en = 1'b0;
    @(negedge clk);
    carry_clr = 1'b0;
    for (int k = 0; k < q; k++) begin
      lsb_in = a[k]; operand = b[k]; shift_en = 1'b1;
      #1 res[k] = out;
      @(negedge clk);
      shift_en = 1'b0;
      @(negedge clk);
    end
  endtask

  initial begin
    logic [31:0] a, b, res, mask;
    int q;
    rst_n = 0; active = 1; op = ALU_ADD; carry_clr = 0; shift_en = 0;
    lsb_in = 0; operand = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(carry == 1'b0, "carry zero after reset");
    // Example: 8-bit word 0000_0101 plus 1 gives 0000_0110.
    run(ALU_ADD, 1'b1, 8, 32'h05, 32'h01, res);
    check(res[7:0] == 8'h06, "5 + 1 = 6");
    // Random additions at the word widths used by the macro.
    for (int i = 0; i < 200; i++) begin
      q = (i % 3 == 0) ? 4 : (i % 3 == 1) ? 8 : 16;
      mask = (32'd1 << q) - 1;
      a = $urandom & mask; b = $urandom & mask;
      run(ALU_ADD, 1'b1, q, a, b, res);
      check((res & mask) == ((a + b) & mask),
            $sformatf("add q=%0d %h+%h got %h", q, a, b, res & mask));
    end
    // Pass mode returns the word unchanged whatever the operand.
    for (int i = 0; i < 20; i++) begin
      a = $urandom & 32'hffff; b = $urandom & 32'hffff;
      run(ALU_PASS, 1'b1, 16, a, b, res);
      check(res[15:0] == a[15:0], "pass mode");
    end
    // Inactive ALU: passes, carry stays zero.
    run(ALU_ADD, 1'b0, 16, 32'hffff, 32'hffff, res);
    check(res[15:0] == 16'hffff, "inactive passes");
    check(carry == 1'b0, "inactive keeps no carry");
    // Carry clear: leave a carry pending, then clear it.
    op = ALU_ADD; active = 1; lsb_in = 1; operand = 1; shift_en = 1;
    @(negedge clk);
    shift_en = 0;
    check(carry == 1'b1, "carry latched");
    carry_clr = 1;
    @(negedge clk);
    carry_clr = 0;
    check(carry == 1'b0, "carry cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

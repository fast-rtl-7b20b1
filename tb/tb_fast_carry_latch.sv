// tb_fast_carry_latch: phase-level test of the full adder and carry latch.
//  * Reproduces the 4-bit example: row 0011 plus operand 0001, bits fed LSB
//    first. Per shift the expected (in1, in2, cin, sum, cout) are
//    (1,1,0,0,1), (1,0,1,0,1), (0,0,1,1,0), (0,0,0,0,0); result 0100.
//  * During phase 1 the carry-in keeps the previous carry while T1 takes the
//    inverted new one; the carry-in changes only in phase 3.
//  * 300 random 8- and 16-bit bit-serial additions.
module tb_fast_carry_latch;
  logic phi1, phi2d, clr, in, operand, sum, cout, t1, cin;
  int checks = 0, failures = 0;

  fast_carry_latch dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // One bit: present in/operand, run phases; returns the sum taken in phase 1.
  task automatic bit_step(input logic a, input logic b, output logic s,
                          input bit verbose_check, input logic [4:0] exp);
    logic c_before;
    in = a; operand = b;
    phi1 = 0; phi2d = 0; #10;
    c_before = cin;
    if (verbose_check) check({a, b, cin, sum, cout} == exp,
                             $sformatf("FA row %b expected %b", {a, b, cin, sum, cout}, exp));
    phi1 = 1; #10;                     // phase 1: sum to MSB, carry to T1
    s = sum;
    check(t1 == ~cout && cin == c_before, "phase 1 parks carry on T1");
    phi1 = 0; #10;                     // phase 2
    check(cin == c_before, "carry-in unchanged in phase 2");
    phi2d = 1; #10;                    // phase 3: carry-in updated
    check(cin == ~t1, "phase 3 passes T1 to carry-in");
  endtask

  initial begin
    logic [15:0] a, b, r, mask;
    logic s;
    int q;
    phi1 = 0; phi2d = 1; in = 0; operand = 0;
    clr = 1; #10; clr = 0; #10;
    check(cin == 1'b0, "carry cleared");
    // 0011 + 0001
    a = 16'b0011; b = 16'b0001; r = '0;
    bit_step(a[0], b[0], s, 1, 5'b11001); r[0] = s;
    bit_step(a[1], b[1], s, 1, 5'b10101); r[1] = s;
    bit_step(a[2], b[2], s, 1, 5'b00110); r[2] = s;
    bit_step(a[3], b[3], s, 1, 5'b00000); r[3] = s;
    check(r[3:0] == 4'b0100, "0011 + 0001 = 0100");
    for (int i = 0; i < 300; i++) begin
      q = (i % 2) ? 16 : 8;
      mask = (q == 16) ? 16'hffff : 16'h00ff;
      a = 16'($urandom) & mask; b = 16'($urandom) & mask; r = '0;
      clr = 1; #10; clr = 0; #10;
      for (int k = 0; k < q; k++) begin
        bit_step(a[k], b[k], s, 0, 5'b0);
        r[k] = s;
      end
      check(r == ((a + b) & mask), $sformatf("%h + %h gave %h", a, b, r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fast_cell: self-checking test of one shiftable cell.
// Drives random writes and shifts and compares q with a reference bit kept
// in the testbench (write wins over shift; neither keeps the bit).
module tb_fast_cell;
  logic clk = 1'b0;
  logic wl, we, bl, shift_en, shift_in, q;
  int checks = 0, failures = 0;
  logic ref_q;

  fast_cell dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wl = 1; we = 1; bl = 0; shift_en = 0; shift_in = 0;
    @(negedge clk);
    ref_q = 1'b0;
    for (int i = 0; i < 500; i++) begin
      wl = 1'($urandom); we = 1'($urandom); bl = 1'($urandom);
      shift_en = 1'($urandom); shift_in = 1'($urandom);
      @(negedge clk);
      if (wl && we) ref_q = bl;
      else if (shift_en) ref_q = shift_in;
      checks++;
      if (q !== ref_q) begin
        failures++;
        $display("mismatch at %0d: q=%b expected %b", i, q, ref_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

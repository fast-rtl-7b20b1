// tb_fast_sweep: the size sweep of the batch-update evaluation.
//
// Runs batch additions on several macro sizes at once, covering word widths
// of 4, 8, 16 and 32 bits, a 128-bit row holding four 32-bit words, and
// 32 to 2048 rows (wide rows only with few rows, to keep the build short):
//   A: 32 rows x 16 columns, 4-bit segments: 4-, 8- and 16-bit words
//   B: 2048 rows x 8 columns, 4-bit segments: 4- and 8-bit words
//   C: 32 rows x 128 columns, 32-bit segments: four 32-bit words per row
//   D: 512 rows x 8 columns: 8-bit words
//   E: 128 rows x 32 columns, 8-bit segments: 8- and 32-bit words
// Every row is checked after every addition. The key property of the design
// is checked too: an addition of q-bit words takes 5*q cycles whatever the
// number of rows (the same 4-bit latency at 32 and 2048 rows, the same 8-bit
// latency at 32, 128, 512 and 2048 rows, the same 32-bit latency at 32 and
// 128 rows).
module tb_fast_sweep;
  logic clk = 1'b0;
  logic rst_n, start;
  logic fin_a, fin_b, fin_c, fin_d, fin_e;
  int   ck_a, ck_b, ck_c, ck_d, ck_e, fl_a, fl_b, fl_c, fl_d, fl_e;
  int   cy_a [4];
  int   cy_b [4];
  int   cy_c [4];
  int   cy_d [4];
  int   cy_e [4];
  int   checks = 0, failures = 0;

  fast_sweep_case #(.ROWS(32), .COLS(16), .SEG_W(4), .NW(3), .WIDTHS('{4, 8, 16, 0})) u_a (
    .clk (clk), .rst_n (rst_n), .start (start), .finished (fin_a),
    .checks (ck_a), .failures (fl_a), .cycles (cy_a));
  fast_sweep_case #(.ROWS(2048), .COLS(8), .SEG_W(4), .NW(2), .WIDTHS('{4, 8, 0, 0})) u_b (
    .clk (clk), .rst_n (rst_n), .start (start), .finished (fin_b),
    .checks (ck_b), .failures (fl_b), .cycles (cy_b));
  fast_sweep_case #(.ROWS(32), .COLS(128), .SEG_W(32), .NW(1), .WIDTHS('{32, 0, 0, 0})) u_c (
    .clk (clk), .rst_n (rst_n), .start (start), .finished (fin_c),
    .checks (ck_c), .failures (fl_c), .cycles (cy_c));
  fast_sweep_case #(.ROWS(512), .COLS(8), .SEG_W(8), .NW(1), .WIDTHS('{8, 0, 0, 0})) u_d (
    .clk (clk), .rst_n (rst_n), .start (start), .finished (fin_d),
    .checks (ck_d), .failures (fl_d), .cycles (cy_d));
  fast_sweep_case #(.ROWS(128), .COLS(32), .SEG_W(8), .NW(2), .WIDTHS('{8, 32, 0, 0})) u_e (
    .clk (clk), .rst_n (rst_n), .start (start), .finished (fin_e),
    .checks (ck_e), .failures (fl_e), .cycles (cy_e));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    rst_n = 0; start = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    wait (fin_a && fin_b && fin_c && fin_d && fin_e);
    checks   += ck_a + ck_b + ck_c + ck_d + ck_e;
    failures += fl_a + fl_b + fl_c + fl_d + fl_e;
    check(cy_a[0] == 20,  $sformatf("4-bit, 32 rows: %0d cycles", cy_a[0]));
    check(cy_a[1] == 40,  $sformatf("8-bit, 32 rows: %0d cycles", cy_a[1]));
    check(cy_a[2] == 80,  $sformatf("16-bit, 32 rows: %0d cycles", cy_a[2]));
    check(cy_d[0] == 40,  $sformatf("8-bit, 512 rows: %0d cycles", cy_d[0]));
    check(cy_e[0] == 40,  $sformatf("8-bit, 128 rows: %0d cycles", cy_e[0]));
    check(cy_b[0] == 20,  $sformatf("4-bit, 2048 rows: %0d cycles", cy_b[0]));
    check(cy_b[1] == 40,  $sformatf("8-bit, 2048 rows: %0d cycles", cy_b[1]));
    check(cy_e[1] == 160, $sformatf("32-bit, 128 rows: %0d cycles", cy_e[1]));
    check(cy_c[0] == 160, $sformatf("4 x 32-bit, 32 rows: %0d cycles", cy_c[0]));
    $display("batch-update cycles: 4b/32r=%0d 8b/32r=%0d 16b/32r=%0d 8b/512r=%0d 8b/128r=%0d 4b/2048r=%0d 8b/2048r=%0d 32b/128r=%0d 4x32b/32r=%0d",
             cy_a[0], cy_a[1], cy_a[2], cy_d[0], cy_e[0], cy_b[0], cy_b[1], cy_e[1], cy_c[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

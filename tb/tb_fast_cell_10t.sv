// tb_fast_cell_10t: phase-level test of a row of four behavioural 10T cells
// closed into a ring (cell 4's output drives cell 1's phi1 gate), driven by
// the sequence hold - phi2d only - phi1 - none - phi2 - phi2 + phi2d.
//  * Reproduces the shift transient: the row starts as 0,0,0,1 (cells 1..4)
//    and after each of four steps holds 1,0,0,0 / 0,1,0,0 / 0,0,1,0 /
//    0,0,0,1.
//  * Random contents rotate right by one cell per step for 200 steps.
//  * After phase 1 alone only the first inverter inputs have moved: the
//    cell outputs still show the old bits (the dynamic node holds them).
//  * Writes through the wordline.
module tb_fast_cell_10t;
  logic       phi1, phi2, phi2d, we;
  logic [3:0] wl, bl, q, so, si;
  int checks = 0, failures = 0;

  for (genvar i = 0; i < 4; i++) begin : g_c
    fast_cell_10t u_c (
      .phi1 (phi1), .phi2 (phi2), .phi2d (phi2d),
      .wl (wl[i]), .we (we), .bl (bl[i]),
      .shift_in (si[i]), .q (q[i]), .shift_out (so[i])
    );
  end
  // ring: cell i takes cell i-1, cell 0 takes cell 3
  assign si = {so[2:0], so[3]};

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic set(input logic p1, input logic p2, input logic p2d);
    phi1 = p1; phi2 = p2; phi2d = p2d;
    #10;
  endtask

  task automatic shift_step(input bit check_mid);
    logic [3:0] prev_q = q;
    set(0, 0, 1);   // phi2 off first
    set(1, 0, 0);   // phase 1
    if (check_mid) check(q == prev_q, "outputs hold during phase 1");
    set(0, 0, 0);
    set(0, 1, 0);   // phase 2
    set(0, 1, 1);   // phase 3
  endtask

  task automatic write_all(input logic [3:0] v);
    wl = 4'hf; we = 1; bl = v;
    #10;
    wl = 0; we = 0;
    #10;
  endtask

  // expected index: q[0] is cell 1 (leftmost)
  initial begin
    logic [3:0] exp;
    wl = 0; we = 0; bl = 0;
    set(0, 1, 1);
    write_all(4'b1000);            // cells 1..4 = 0,0,0,1
    check(q == 4'b1000, "initial 0,0,0,1");
    shift_step(1); check(q == 4'b0001, "after 1st shift 1,0,0,0");
    shift_step(1); check(q == 4'b0010, "after 2nd shift 0,1,0,0");
    shift_step(1); check(q == 4'b0100, "after 3rd shift 0,0,1,0");
    shift_step(1); check(q == 4'b1000, "after 4th shift 0,0,0,1");
    exp = 4'($urandom);
    write_all(exp);
    check(q == exp, "write");
    for (int i = 0; i < 200; i++) begin
      shift_step(i % 7 == 0);
      exp = {exp[2:0], exp[3]};
      check(q == exp, $sformatf("rotate step %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_phase_vs_rtl: checks the register-level row against the phase-level
// circuit models.
//
// A ring of 16 fast_cell_10t models closed through a fast_carry_latch model
// (one 16-bit word) and a register-level fast_row in 1 x 16 mode are driven
// by the same phase_gen: the models by phi1/phi2/phi2d, the row by shift_en.
// Both get the same writes, additions and rotations, and after every
// operation the two rows and a reference value must agree. This shows that
// one register update per step (at the end of phase 1) is a faithful
// abstraction of the three-phase circuit.
module tb_phase_vs_rtl;
  import fast_pkg::*;
  localparam int COLS = 16;
  logic            clk = 1'b0;
  logic            rst_n, start, shift_en, busy, done;
  logic [4:0]      nsteps;
  phase_t          phases;
  // register-level row
  logic            wl, we, carry_clr;
  logic [COLS-1:0] wdata, q_rtl;
  alu_op_e         op;
  logic [1:0]      operand;
  // phase-level ring
  logic [COLS-1:0] q_ph, so, si;
  logic            sum, cout, t1, cin, fa_in, fa_b, ph_op_add;
  logic [15:0]     opnd;
  int              kp;
  int checks = 0, failures = 0;

  phase_gen #(.STEP_W(5)) u_pg (
    .clk (clk), .rst_n (rst_n), .start (start), .nsteps (nsteps),
    .phases (phases), .shift_en (shift_en), .busy (busy), .done (done)
  );

  fast_row #(.COLS(COLS), .SEG_W(8)) u_row (
    .clk (clk), .rst_n (rst_n), .wl (wl), .we (we), .wdata (wdata), .q (q_rtl),
    .join_seg (1'b1), .shift_en (shift_en), .carry_clr (carry_clr), .op (op),
    .operand (operand)
  );

  // Cell i of the ring holds data bit COLS-1-i.
  for (genvar i = 0; i < COLS; i++) begin : g_ring
    fast_cell_10t u_c (
      .phi1 (phases.phi1), .phi2 (phases.phi2), .phi2d (phases.phi2d),
      .wl (wl), .we (we), .bl (wdata[COLS-1-i]),
      .shift_in (si[i]), .q (q_ph[COLS-1-i]), .shift_out (so[i])
    );
    if (i > 0) begin : g_link
      assign si[i] = so[i-1];
    end
  end
  assign fa_in = so[COLS-1];
  assign si[0] = ph_op_add ? sum : fa_in;

  fast_carry_latch u_fa (
    .phi1 (phases.phi1), .phi2d (phases.phi2d), .clr (carry_clr),
    .in (fa_in), .operand (fa_b), .sum (sum), .cout (cout), .t1 (t1), .cin (cin)
  );

  // Operand bit for the phase model: step index advanced when phi2 rises
  // (phase 2), so it is steady throughout phase 1.
  always @(posedge phases.phi2 or posedge carry_clr) begin
    if (carry_clr) kp <= 0;
    else if (busy) kp <= kp + 1;
  end
  assign fa_b = ph_op_add ? opnd[kp % 16] : 1'b0;

  // Operand bit for the register row, counted on shift_en.
  int kr;
  always_ff @(posedge clk) begin
    if (carry_clr) kr <= 0;
    else if (shift_en) kr <= kr + 1;
  end
  assign operand = {(op == ALU_ADD) ? opnd[kr % 16] : 1'b0, 1'b0};  // row-end ALU is segment 1

  always #5 clk = ~clk;

  initial begin
    #2000000;
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
    @(negedge clk);
  endtask

  task automatic run(input alu_op_e o, input int n, input logic [15:0] b);
    op = o; ph_op_add = (o == ALU_ADD); opnd = b;
    carry_clr = 1;
    @(negedge clk);
    carry_clr = 0;
    start = 1; nsteps = 5'(n);
    @(negedge clk);
    start = 0;
    while (busy) @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    logic [15:0] a, b, e;
    int k;
    rst_n = 0; start = 0; nsteps = 0; wl = 0; we = 0; wdata = 0; carry_clr = 0;
    op = ALU_PASS; ph_op_add = 0; opnd = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 60; i++) begin
      a = 16'($urandom); b = 16'($urandom);
      write_row(a);
      check(q_ph == a && q_rtl == a, "write");
      run(ALU_ADD, 16, b);
      e = a + b;
      check(q_rtl == e, $sformatf("rtl add %h+%h got %h", a, b, q_rtl));
      check(q_ph == e, $sformatf("phase model add %h+%h got %h", a, b, q_ph));
      k = 1 + $urandom % 15;
      run(ALU_PASS, k, 16'h0);
      for (int j = 0; j < k; j++) e = {e[0], e[15:1]};
      check(q_rtl == e && q_ph == e, $sformatf("rotate by %0d: rtl %h phase %h exp %h", k, q_rtl, q_ph, e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

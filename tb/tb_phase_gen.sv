// tb_phase_gen: checks the shift control sequence.
// For n = 0..20 steps: the exact per-cycle pattern of (phi1, phi2, phi2d),
// that phi2d equals phi2 delayed by one cycle, that phi1 never overlaps
// phi2 or phi2d, one shift_en per step during phi1, a run length of 5n
// cycles and done in the last cycle.
module tb_phase_gen;
  import fast_pkg::*;
  logic       clk = 1'b0;
  logic       rst_n, start, shift_en, busy, done;
  logic [4:0] nsteps;
  phase_t     phases;
  int checks = 0, failures = 0;

  phase_gen #(.STEP_W(5)) dut (.*);

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

  // Expected (phi1, phi2, phi2d) in sub-cycle j of a step.
  function automatic logic [2:0] expect_ph(input int j);
    case (j)
      0: return 3'b001;
      1: return 3'b100;
      2: return 3'b000;
      3: return 3'b010;
      default: return 3'b011;
    endcase
  endfunction

  initial begin
    int cyc, shifts;
    logic prev_phi2;
    rst_n = 0; start = 0; nsteps = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(phases == 3'b011 && !busy, "idle holds phi2 and phi2d");
    for (int n = 0; n <= 20; n++) begin
      nsteps = 5'(n); start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0; shifts = 0; prev_phi2 = 1'b1;
      if (n == 0) begin
        check(done && !busy, "zero steps: done at once");
      end else begin
        while (1) begin
          check(phases == expect_ph(cyc % 5), $sformatf("n=%0d cycle %0d pattern %b", n, cyc, phases));
          check(phases.phi2d == prev_phi2, "phi2d is phi2 delayed");
          check(!(phases.phi1 && (phases.phi2 || phases.phi2d)), "non-overlap");
          check(shift_en == phases.phi1, "shift_en during phase 1");
          if (shift_en) shifts++;
          prev_phi2 = phases.phi2;
          cyc++;
          if (done) break;
          if (cyc > 200) break;
          @(negedge clk);
        end
        check(cyc == 5 * n, $sformatf("n=%0d run took %0d cycles", n, cyc));
        check(shifts == n, $sformatf("n=%0d gave %0d shifts", n, shifts));
        @(negedge clk);
        check(!busy && phases == 3'b011, "back to hold");
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

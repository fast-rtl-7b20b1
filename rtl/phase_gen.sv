// phase_gen: generates the three shift control signals phi1, phi2 and phi2d
// of the FAST array for a requested number of shift steps.
//
// The in-cell shifter needs, per step: phase 1 with only phi1 on (the
// inter-cell gate passes each bit to the right neighbour), phase 2 with phi2
// on, and phase 3 with phi2 and phi2d on (each cell closes its loop and
// restores the bit). phi1 and phi2 must never overlap, and phi2d is phi2 with
// a delay. Between steps the array holds with phi2 = phi2d = 1.
//
// Here the system clock is divided into five sub-cycles per step:
//   DEAD0 (phi2d only) - P1 (phi1) - DEAD1 (none) - P2 (phi2) - P3 (phi2, phi2d)
// so phi2d is exactly phi2 delayed by one sub-cycle, and a dead sub-cycle
// separates phi1 from phi2 on both sides. shift_en is high during P1; the
// register-level cells and carry latches update on the clock edge that ends
// P1. The three phases and their order follow the source; the sub-cycle
// counts and dead times are this design's choice (the chip derives them from
// a two-phase non-overlapping clock and an inverter-pair delay).
//
// Interface: start (while idle) loads nsteps and begins; busy is high until
// the end; done pulses during the last sub-cycle (P3 of the last step), or
// the cycle after start when nsteps is 0. A run of n steps takes 5n cycles.
module phase_gen
  import fast_pkg::*;
#(
  parameter int STEP_W = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [STEP_W-1:0] nsteps,
  output phase_t            phases,
  output logic              shift_en,  // one clock per step, during phase 1
  output logic              busy,
  output logic              done
);

  phase_state_e      state, state_n;
  logic [STEP_W-1:0] left_q;          // steps still to start, this one included
  logic              zero_done_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= PH_HOLD;
      left_q      <= '0;
      zero_done_q <= 1'b0;
    end else begin
      state       <= state_n;
      zero_done_q <= 1'b0;
      if (state == PH_HOLD && start) begin
        left_q      <= nsteps;
        zero_done_q <= (nsteps == '0);
      end else if (state == PH_P3) begin
        left_q <= left_q - 1'b1;
      end
    end
  end

  always_comb begin
    state_n = state;
    unique case (state)
      PH_HOLD:  if (start && nsteps != '0) state_n = PH_DEAD0;
      PH_DEAD0: state_n = PH_P1;
      PH_P1:    state_n = PH_DEAD1;
      PH_DEAD1: state_n = PH_P2;
      PH_P2:    state_n = PH_P3;
      PH_P3:    state_n = (left_q == STEP_W'(1)) ? PH_HOLD : PH_DEAD0;
      default:  state_n = PH_HOLD;
    endcase
  end

  always_comb begin
    unique case (state)
      PH_HOLD:  phases = '{phi1: 1'b0, phi2: 1'b1, phi2d: 1'b1};
      PH_DEAD0: phases = '{phi1: 1'b0, phi2: 1'b0, phi2d: 1'b1};
      PH_P1:    phases = '{phi1: 1'b1, phi2: 1'b0, phi2d: 1'b0};
      PH_DEAD1: phases = '{phi1: 1'b0, phi2: 1'b0, phi2d: 1'b0};
      PH_P2:    phases = '{phi1: 1'b0, phi2: 1'b1, phi2d: 1'b0};
      PH_P3:    phases = '{phi1: 1'b0, phi2: 1'b1, phi2d: 1'b1};
      default:  phases = '{phi1: 1'b0, phi2: 1'b1, phi2d: 1'b1};
    endcase
  end

  assign shift_en = (state == PH_P1);
  assign busy     = (state != PH_HOLD);
  assign done     = ((state == PH_P3) && (left_q == STEP_W'(1))) || zero_done_q;

  // phi1 (inter-cell gate) never overlaps the intra-cell switches.
  a_nonoverlap: assert property (@(posedge clk) disable iff (!rst_n)
    !(phases.phi1 && (phases.phi2 || phases.phi2d)));

endmodule

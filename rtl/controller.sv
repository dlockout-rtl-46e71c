// controller: RTL controller of the obfuscated design, with DLockout.
//
// A Moore state machine S0, S1, S2..Sn plus a blackhole state. The
// transitions follow the lockout scheme:
//   S0 -> S1              (here: when start is high; the primary inputs are
//                          latched into the datapath registers)
//   S1 -> S0              if dp_comp = 100, partial lockout
//   S1 -> blackhole       if dp_comp = 001, design lockout
//   S1 -> S2              otherwise, the key is correct
//   S2 .. Sn              one compute step each (N_STEPS in all)
//   Sn -> S0              finish is pulsed in the following cycle
//   blackhole -> blackhole, for ever
// S2..Sn are one encoded phase (ST_COMP) plus a step counter, so the
// number of steps is a parameter. Reset (asynchronous, active high) returns
// to S0; a locked design still enters the blackhole at its next S1 because
// the attempt count is non-volatile. Waiting for start in S0 and the
// one-cycle registered finish pulse are this design's choices.
module controller
  import dlockout_pkg::*;
#(
  parameter int unsigned N_STEPS = 8
) (
  input  logic        clk,
  input  logic        reset,
  input  logic        start,
  input  dp_comp_e    dp_comp,
  output ctrl_t       ctrl,
  output logic        finish,
  output ctrl_state_e state
);

  initial assert (N_STEPS >= 1 && N_STEPS <= (1 << STEP_W))
    else $fatal(1, "controller: N_STEPS out of range");

  ctrl_state_e       state_q, state_d;
  logic [STEP_W-1:0] step_q, step_d;
  logic              finish_d;

  // Next-state logic.
  always_comb begin
    state_d  = state_q;
    step_d   = step_q;
    finish_d = 1'b0;
    unique case (state_q)
      ST_S0: begin
        step_d = '0;
        if (start) state_d = ST_S1;
      end
      ST_S1: begin
        step_d = '0;
        if (dp_comp == DP_PARTIAL)      state_d = ST_S0;
        else if (dp_comp == DP_LOCKOUT) state_d = ST_BLACKHOLE;
        else                            state_d = ST_COMP;
      end
      ST_COMP: begin
        if (step_q == STEP_W'(N_STEPS - 1)) begin
          state_d  = ST_S0;
          step_d   = '0;
          finish_d = 1'b1;
        end else begin
          step_d = step_q + STEP_W'(1);
        end
      end
      ST_BLACKHOLE: state_d = ST_BLACKHOLE;
      default:      state_d = ST_S0;
    endcase
  end

  // State register.
  always_ff @(posedge clk or posedge reset) begin
    if (reset) begin
      state_q <= ST_S0;
      step_q  <= '0;
      finish  <= 1'b0;
    end else begin
      state_q <= state_d;
      step_q  <= step_d;
      finish  <= finish_d;
    end
  end

  // Control signals (Moore outputs).
  always_comb begin
    ctrl.load     = (state_q == ST_S0) && start;
    ctrl.check    = (state_q == ST_S1);
    ctrl.step_en  = (state_q == ST_COMP);
    ctrl.step_idx = step_q;
  end

  assign state = state_q;

  // Once in the blackhole, only reset leaves it.
  assert property (@(posedge clk) disable iff (reset)
                   state_q == ST_BLACKHOLE |=> state_q == ST_BLACKHOLE);

endmodule

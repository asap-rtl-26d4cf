// exec_fsm: the two-state Run / NotExec machine behind every EXEC monitor.
//
// Each ASAP monitor reduces its security rule to a single `violation` bit per
// cycle and instantiates this machine. A violation moves the machine to
// NotExec; it stays there until execution of ER is restarted, i.e. the PC is
// at ER_MIN (`restart`) in a cycle with no violation, and then returns to Run.
// The states, the two transitions and their guards are the ones of the
// IVT-immutability FSM in the ASAP paper; reusing the same machine for the
// other monitors is this design's choice.
//
// Timing: `exec` = (state == Run) && !violation. It is a Mealy output, so
// EXEC is already 0 in the cycle in which the violation is seen on the bus,
// matching the LTL rules, which require !EXEC in the violating step itself.
// After a restart, `exec` rises one cycle after the cycle with PC == ER_MIN.
// Reset (rst_n low, synchronous to clk) enters NotExec: nothing has been
// proven after reset.
module exec_fsm
  import asap_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic violation,  // rule broken this cycle
  input  logic restart,    // PC == ER_MIN this cycle
  output logic exec        // this monitor's vote for EXEC
);

  exec_state_e state, state_next;

  always_comb begin
    state_next = state;
    unique case (state)
      RUN:      if (violation)             state_next = NOT_EXEC;
      NOT_EXEC: if (restart && !violation) state_next = RUN;
      default:                             state_next = NOT_EXEC;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) state <= NOT_EXEC;
    else        state <= state_next;
  end

  assign exec = (state == RUN) && !violation;

  // A violation never leaves EXEC high, and NotExec never reports EXEC.
  a_violation_clears: assert property (@(posedge clk) disable iff (!rst_n)
    violation |-> !exec);
  a_notexec_low: assert property (@(posedge clk) disable iff (!rst_n)
    (state == NOT_EXEC) |-> !exec);

endmodule

// er_atomicity_monitor: atomic execution of ER (APEX rules kept by ASAP).
//
// ER, the executable region [ER_MIN, ER_MAX], holds the main task and every
// trusted interrupt service routine. The PC may leave ER only from its last
// instruction (ER_MAX) and may enter ER only at its first (ER_MIN):
//   exit rule : PC in ER, next PC not in ER  -> PC == ER_MAX or !next EXEC
//   entry rule: PC not in ER, next PC in ER  -> next PC == ER_MIN or !next EXEC
// There is deliberately no rule on the interrupt request: an interrupt whose
// ISR is linked inside ER keeps the PC inside ER and EXEC stays 1, while an
// interrupt whose ISR lies outside ER makes the PC leave ER from some address
// other than ER_MAX and EXEC drops. This replaces APEX's "any irq clears
// EXEC" rule, which ASAP removes.
//
// The two rules are the paper's. The circuit is this design's: two flip-flops
// remember whether the previous PC was inside ER and whether it was ER_MAX;
// the present PC is compared with them combinationally, so EXEC is low in the
// first cycle the new PC is on the bus (the "next" state of the rules). The
// violation feeds the shared Run/NotExec machine (exec_fsm), which re-arms at
// PC == ER_MIN. After reset the previous PC counts as outside ER.
module er_atomicity_monitor
  import asap_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  addr_t pc,
  input  addr_t er_min,
  input  addr_t er_max,
  output logic  exec
);

  logic pc_in_er, prev_in_er, prev_at_max;
  logic illegal_exit, illegal_entry, violation;

  assign pc_in_er = in_range(pc, er_min, er_max);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      prev_in_er  <= 1'b0;
      prev_at_max <= 1'b0;
    end else begin
      prev_in_er  <= pc_in_er;
      prev_at_max <= (pc == er_max);
    end
  end

  assign illegal_exit  =  prev_in_er && !pc_in_er && !prev_at_max;
  assign illegal_entry = !prev_in_er &&  pc_in_er && (pc != er_min);
  assign violation     = illegal_exit || illegal_entry;

  exec_fsm u_fsm (
    .clk       (clk),
    .rst_n     (rst_n),
    .violation (violation),
    .restart   (pc == er_min),
    .exec      (exec)
  );

endmodule

// meta_monitor: the proof's metadata may not change after execution.
//
// EXEC vouches for one run of ER, for one challenge and one pair of ER/OR
// bounds. If software could rewrite the challenge or the bounds after the run,
// an old run could be presented as the answer to a new challenge or as the
// run of a different region. The monitor therefore drops its EXEC vote on any
// CPU write, or any DMA access, to the metadata block (challenge, ER_MIN,
// ER_MAX, OR_MIN, OR_MAX, EXEC) and re-arms at PC == ER_MIN (exec_fsm).
// Software configures the bounds and stores the challenge before it jumps to
// ER_MIN. This rule is this design's reading of what EXEC must mean; the paper
// does not spell it out. EXEC is low in the violating cycle.
module meta_monitor
  import asap_pkg::*;
#(
  parameter addr_t META_BASE  = META_BASE_DEFAULT,
  parameter int    CHAL_BYTES = CHAL_BYTES_DEFAULT
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mcu_bus_t bus,
  input  addr_t    er_min,
  output logic     exec
);

  localparam addr_t META_LAST = meta_last(META_BASE, CHAL_BYTES);

  logic violation;

  assign violation = (bus.w_en   && in_range(bus.d_addr,   META_BASE, META_LAST))
                  || (bus.dma_en && in_range(bus.dma_addr, META_BASE, META_LAST));

  exec_fsm u_fsm (
    .clk       (clk),
    .rst_n     (rst_n),
    .violation (violation),
    .restart   (bus.pc == er_min),
    .exec      (exec)
  );

endmodule

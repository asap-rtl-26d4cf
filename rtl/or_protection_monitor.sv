// or_protection_monitor: only ER's own code may write the output region.
//
// OR, [OR_MIN, OR_MAX], holds the outputs that the proof binds to the
// execution. A CPU write into OR is legal only while the PC is inside ER
// (ER producing its result); the same write from code outside ER, or any DMA
// access to OR, drops this monitor's EXEC vote:
//     violation = (W_en && D_addr in OR && !(PC in ER)) || (DMA_en && DMA_addr in OR)
// The monitor re-arms at PC == ER_MIN (exec_fsm). The rule follows the
// paper's description of APEX (OR unchanged between execution and attestation,
// and changed during execution only by ER); the circuit is this design's.
// EXEC is low in the violating cycle.
module or_protection_monitor
  import asap_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  mcu_bus_t bus,
  input  addr_t    er_min,
  input  addr_t    er_max,
  input  addr_t    or_min,
  input  addr_t    or_max,
  output logic     exec
);

  logic pc_in_er, cpu_write_or, dma_or, violation;

  assign pc_in_er     = in_range(bus.pc, er_min, er_max);
  assign cpu_write_or = bus.w_en   && in_range(bus.d_addr,   or_min, or_max);
  assign dma_or       = bus.dma_en && in_range(bus.dma_addr, or_min, or_max);
  assign violation    = (cpu_write_or && !pc_in_er) || dma_or;

  exec_fsm u_fsm (
    .clk       (clk),
    .rst_n     (rst_n),
    .violation (violation),
    .restart   (bus.pc == er_min),
    .exec      (exec)
  );

endmodule

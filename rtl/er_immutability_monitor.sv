// er_immutability_monitor: ER may not change between execution and
// attestation (APEX rule that ASAP reuses for ISR immutability, [AP2]).
//
// Because ASAP links the trusted ISRs into ER, protecting ER protects them
// too. The monitor drops its EXEC vote on any CPU write into [ER_MIN, ER_MAX]
// and on any DMA access to it:
//     violation = (W_en && D_addr in ER) || (DMA_en && DMA_addr in ER)
// and re-arms at PC == ER_MIN (exec_fsm). The rule follows the paper's
// description of APEX; the circuit, and counting DMA accesses of either
// direction, are this design's choice. EXEC is low in the violating cycle.
module er_immutability_monitor
  import asap_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  mcu_bus_t bus,
  input  addr_t    er_min,
  input  addr_t    er_max,
  output logic     exec
);

  logic violation;

  assign violation = (bus.w_en   && in_range(bus.d_addr,   er_min, er_max))
                  || (bus.dma_en && in_range(bus.dma_addr, er_min, er_max));

  exec_fsm u_fsm (
    .clk       (clk),
    .rst_n     (rst_n),
    .violation (violation),
    .restart   (bus.pc == er_min),
    .exec      (exec)
  );

endmodule

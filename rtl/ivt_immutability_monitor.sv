// ivt_immutability_monitor: ASAP property [AP1], IVT immutability.
//
// The interrupt vector table decides where each interrupt source jumps. For a
// proof of execution that allows interrupts, the IVT seen by the later
// attestation must be the one that was in force while ER ran. This monitor
// therefore drops its EXEC vote whenever the CPU writes, or the DMA engine
// accesses, any byte of the IVT:
//     violation = (W_en && D_addr in IVT) || (DMA_en && DMA_addr in IVT)
// and re-arms when ER is entered again at ER_MIN with no such access.
// The rule, the Run/NotExec machine (exec_fsm) and the IVT range
// 0xFFE0..0xFFFF follow the paper. A DMA access of either direction counts,
// as in the paper's formal rule; the bus does not carry the DMA direction.
//
// Interface: the monitor bus (mcu_bus_t), ER_MIN from the metadata, and the
// monitor's EXEC vote. Timing as in exec_fsm: EXEC is low in the violating
// cycle itself.
module ivt_immutability_monitor
  import asap_pkg::*;
#(
  parameter addr_t IVT_MIN = IVT_MIN_DEFAULT,
  parameter addr_t IVT_MAX = IVT_MAX_DEFAULT
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mcu_bus_t bus,
  input  addr_t    er_min,
  output logic     exec
);

  logic cpu_write_ivt, dma_ivt, violation;

  assign cpu_write_ivt = bus.w_en   && in_range(bus.d_addr,   IVT_MIN, IVT_MAX);
  assign dma_ivt       = bus.dma_en && in_range(bus.dma_addr, IVT_MIN, IVT_MAX);
  assign violation     = cpu_write_ivt || dma_ivt;

  exec_fsm u_fsm (
    .clk       (clk),
    .rst_n     (rst_n),
    .violation (violation),
    .restart   (bus.pc == er_min),
    .exec      (exec)
  );

endmodule

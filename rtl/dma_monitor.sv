// dma_monitor: no DMA transfer while ER is executing.
//
// During the proven execution no agent other than ER's code may change data
// memory. A DMA controller could do so behind the CPU's back, so any DMA
// access while the PC is inside [ER_MIN, ER_MAX] drops this monitor's EXEC
// vote:   violation = DMA_en && PC in ER
// The monitor re-arms at PC == ER_MIN (exec_fsm). The rule follows the
// paper's description of APEX; the circuit, and taking "during execution" to
// mean "PC inside ER", are this design's. EXEC is low in the violating cycle.
module dma_monitor
  import asap_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  addr_t pc,
  input  logic  dma_en,
  input  addr_t er_min,
  input  addr_t er_max,
  output logic  exec
);

  logic violation;

  assign violation = dma_en && in_range(pc, er_min, er_max);

  exec_fsm u_fsm (
    .clk       (clk),
    .rst_n     (rst_n),
    .violation (violation),
    .restart   (pc == er_min),
    .exec      (exec)
  );

endmodule

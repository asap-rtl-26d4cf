// asap_hwmod: the ASAP proof-of-execution hardware, top level.
//
// ASAP lets code that proves its own execution (ER) take interrupts. Its
// trusted ISRs are linked inside ER, so the hardware needs no interrupt
// rule at all: it only checks where the PC goes. An interrupt served inside
// ER leaves the PC in ER and keeps EXEC; one served outside ER makes the PC
// leave ER early and clears EXEC. The IVT is frozen by an extra monitor so
// that the attested vector table is the one that was in force during the run.
//
// Structure: meta_regs holds the challenge and the ER/OR bounds written by
// software. Five monitors, each a Run/NotExec machine (exec_fsm), watch the
// core's bus in parallel with the CPU:
//   er_atomicity_monitor     enter ER only at ER_MIN, leave only from ER_MAX
//   er_immutability_monitor  no write/DMA to ER (protects the linked ISRs)
//   or_protection_monitor    OR written only by code running in ER, no DMA
//   dma_monitor              no DMA while the PC is in ER
//   ivt_immutability_monitor no write/DMA to the IVT (0xFFE0..0xFFFF)
//   meta_monitor             no write/DMA to the metadata
// EXEC is the AND of their votes. Each monitor re-arms when the PC reaches
// ER_MIN in a cycle without its own violation, so EXEC rises one cycle after
// the first instruction of ER and stays 1 until some rule is broken.
// The set of rules and the IVT monitor follow the paper; the AND structure,
// the metadata rule and map, and the cycle timing are this design's.
// The paper's HW-Mod also holds the remote-attestation hardware (key
// protection, attestation atomicity, core reset); that part is not included.
//
// Interface: `bus` carries PC, irq, R_en, W_en, D_addr, write data, DMA_en and
// DMA_addr of the current cycle; irq is not used. `exec` is the EXEC flag,
// low in the very cycle a violation is on the bus. `r_data` is the metadata
// read port (one cycle latency). The bounds and challenge are outputs for the
// attestation code and the core.
module asap_hwmod
  import asap_pkg::*;
#(
  parameter addr_t META_BASE  = META_BASE_DEFAULT,
  parameter int    CHAL_BYTES = CHAL_BYTES_DEFAULT,
  parameter addr_t IVT_MIN    = IVT_MIN_DEFAULT,
  parameter addr_t IVT_MAX    = IVT_MAX_DEFAULT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  mcu_bus_t                bus,
  output logic                    exec,
  output word_t                   r_data,
  output addr_t                   er_min,
  output addr_t                   er_max,
  output addr_t                   or_min,
  output addr_t                   or_max,
  output logic [CHAL_BYTES*8-1:0] chal
);

  logic exec_atom, exec_er, exec_or, exec_dma, exec_ivt, exec_meta;

  meta_regs #(.META_BASE(META_BASE), .CHAL_BYTES(CHAL_BYTES)) u_meta_regs (
    .clk, .rst_n, .bus, .exec,
    .r_data, .er_min, .er_max, .or_min, .or_max, .chal
  );

  er_atomicity_monitor u_atom (
    .clk, .rst_n, .pc(bus.pc), .er_min, .er_max, .exec(exec_atom)
  );

  er_immutability_monitor u_er_immut (
    .clk, .rst_n, .bus, .er_min, .er_max, .exec(exec_er)
  );

  or_protection_monitor u_or_prot (
    .clk, .rst_n, .bus, .er_min, .er_max, .or_min, .or_max, .exec(exec_or)
  );

  dma_monitor u_dma (
    .clk, .rst_n, .pc(bus.pc), .dma_en(bus.dma_en), .er_min, .er_max,
    .exec(exec_dma)
  );

  ivt_immutability_monitor #(.IVT_MIN(IVT_MIN), .IVT_MAX(IVT_MAX)) u_ivt (
    .clk, .rst_n, .bus, .er_min, .exec(exec_ivt)
  );

  meta_monitor #(.META_BASE(META_BASE), .CHAL_BYTES(CHAL_BYTES)) u_meta_mon (
    .clk, .rst_n, .bus, .er_min, .exec(exec_meta)
  );

  assign exec = exec_atom && exec_er && exec_or && exec_dma && exec_ivt && exec_meta;

  // An IVT write by the CPU never leaves EXEC set ([AP1]).
  a_ivt_write_clears: assert property (@(posedge clk) disable iff (!rst_n)
    (bus.w_en && in_range(bus.d_addr, IVT_MIN, IVT_MAX)) |-> !exec);

endmodule

// asap_pkg: types and constants shared by the ASAP proof-of-execution monitors.
//
// All addresses are 16-bit byte addresses of an MSP430-class MCU (64 KiB
// address space). mcu_bus_t bundles the signals the monitors observe on the
// core each clock cycle: the program counter of the executing instruction,
// the interrupt request, the CPU data read/write strobes with their address
// and write data, and the DMA enable with its address. The IVT location
// (0xFFE0..0xFFFF, the last 32 bytes of memory) is the OpenMSP430 one; the
// metadata base address and challenge size are this design's choice.
package asap_pkg;

  typedef logic [15:0] addr_t;
  typedef logic [15:0] word_t;

  // Signals sampled from the core and the DMA controller every cycle.
  typedef struct packed {
    addr_t pc;        // address of the instruction being executed
    logic  irq;       // interrupt request (carried, not used by ASAP)
    logic  r_en;      // CPU data read
    logic  w_en;      // CPU data write
    addr_t d_addr;    // CPU data address
    word_t d_wdata;   // CPU write data
    logic  dma_en;    // DMA access in progress
    addr_t dma_addr;  // DMA address
  } mcu_bus_t;

  // The two states of every EXEC monitor.
  typedef enum logic {
    NOT_EXEC = 1'b0,
    RUN      = 1'b1
  } exec_state_e;

  // Interrupt vector table of OpenMSP430.
  localparam addr_t IVT_MIN_DEFAULT = 16'hFFE0;
  localparam addr_t IVT_MAX_DEFAULT = 16'hFFFF;

  // Metadata block: challenge, then ER_MIN, ER_MAX, OR_MIN, OR_MAX, EXEC.
  localparam addr_t META_BASE_DEFAULT  = 16'h0140;
  localparam int    CHAL_BYTES_DEFAULT = 32;

  // Word offsets of the bound registers, counted after the challenge.
  localparam int META_ER_MIN = 0;
  localparam int META_ER_MAX = 1;
  localparam int META_OR_MIN = 2;
  localparam int META_OR_MAX = 3;
  localparam int META_EXEC   = 4;
  localparam int META_WORDS_AFTER_CHAL = 5;

  // Inclusive range test: lo <= a <= hi.
  function automatic logic in_range(addr_t a, addr_t lo, addr_t hi);
    return (a >= lo) && (a <= hi);
  endfunction

  // Last byte address of the metadata block.
  function automatic addr_t meta_last(addr_t base, int chal_bytes);
    return addr_t'(int'(base) + chal_bytes + 2 * META_WORDS_AFTER_CHAL - 1);
  endfunction

endpackage

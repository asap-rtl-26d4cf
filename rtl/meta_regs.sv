// meta_regs: memory-mapped metadata of a proof of execution.
//
// Software stores the verifier's challenge and the bounds of the executable
// region (ER) and output region (OR) here before it starts ER; the monitors
// read the bounds, the attestation code reads the challenge, and software can
// read EXEC back. EXEC itself is produced by hardware only: writes to its word
// are ignored.
//
// Map (16-bit words, byte addresses, little-endian MSP430 style):
//   META_BASE + 0 .. + CHAL_BYTES-1   challenge, CHAL_BYTES/2 words
//   META_BASE + CHAL_BYTES + 0        ER_MIN
//                          + 2        ER_MAX
//                          + 4        OR_MIN
//                          + 6        OR_MAX
//                          + 8        EXEC (bit 0, read-only)
// The list of fields and their order follow the paper's system figure; the
// addresses, the challenge size, word-only writes (d_addr[0] is ignored),
// the one-cycle registered read data and the reset value 0 of every register
// are this design's choices. Only the CPU bus writes here; whether a write
// is allowed at all is judged by meta_monitor, not here.
//
// Timing: a write with w_en high takes effect at the next rising clk edge;
// r_data shows the addressed word in the cycle after r_en (0 otherwise).
module meta_regs
  import asap_pkg::*;
#(
  parameter addr_t META_BASE  = META_BASE_DEFAULT,
  parameter int    CHAL_BYTES = CHAL_BYTES_DEFAULT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  mcu_bus_t                bus,
  input  logic                    exec,
  output word_t                   r_data,
  output addr_t                   er_min,
  output addr_t                   er_max,
  output addr_t                   or_min,
  output addr_t                   or_max,
  output logic [CHAL_BYTES*8-1:0] chal
);

  localparam int    CHAL_WORDS = CHAL_BYTES / 2;
  localparam int    N_WORDS    = CHAL_WORDS + META_WORDS_AFTER_CHAL;
  localparam addr_t META_LAST  = meta_last(META_BASE, CHAL_BYTES);
  localparam int    IDX_W      = $clog2(N_WORDS);
  localparam int    CIDX_W     = (CHAL_WORDS > 1) ? $clog2(CHAL_WORDS) : 1;

  initial begin
    assert (CHAL_BYTES > 0 && CHAL_BYTES % 2 == 0)
      else $error("CHAL_BYTES must be a positive even number");
  end

  word_t chal_q [CHAL_WORDS];

  logic             w_hit, r_hit;
  logic [IDX_W-1:0] w_idx;
  addr_t            w_off;

  assign w_hit = bus.w_en && in_range(bus.d_addr, META_BASE, META_LAST);
  assign r_hit = bus.r_en && in_range(bus.d_addr, META_BASE, META_LAST);
  assign w_off = bus.d_addr - META_BASE;
  assign w_idx = w_off[IDX_W:1];  // reads and writes share the one address bus

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      er_min <= '0;
      er_max <= '0;
      or_min <= '0;
      or_max <= '0;
      for (int i = 0; i < CHAL_WORDS; i++) chal_q[i] <= '0;
    end else if (w_hit) begin
      if (int'(w_idx) < CHAL_WORDS) begin
        chal_q[w_idx[CIDX_W-1:0]] <= bus.d_wdata;
      end else begin
        unique case (int'(w_idx) - CHAL_WORDS)
          META_ER_MIN: er_min <= bus.d_wdata;
          META_ER_MAX: er_max <= bus.d_wdata;
          META_OR_MIN: or_min <= bus.d_wdata;
          META_OR_MAX: or_max <= bus.d_wdata;
          default: ;  // EXEC word: not writable by software
        endcase
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r_data <= '0;
    end else if (!r_hit) begin
      r_data <= '0;
    end else if (int'(w_idx) < CHAL_WORDS) begin
      r_data <= chal_q[w_idx[CIDX_W-1:0]];
    end else begin
      unique case (int'(w_idx) - CHAL_WORDS)
        META_ER_MIN: r_data <= er_min;
        META_ER_MAX: r_data <= er_max;
        META_OR_MIN: r_data <= or_min;
        META_OR_MAX: r_data <= or_max;
        default:     r_data <= {15'b0, exec};
      endcase
    end
  end

  always_comb begin
    for (int i = 0; i < CHAL_WORDS; i++) chal[16*i +: 16] = chal_q[i];
  end

endmodule

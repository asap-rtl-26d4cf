// tb_asap_hwmod: end-to-end test of the ASAP hardware at its default
// parameters.
//
// The test plays the part of the MCU core: it drives, cycle by cycle, the PC
// and bus activity of the software flow that ASAP is built for, and checks
// the EXEC flag against the value the security rules demand at each point.
//   1. Setup outside ER: store the challenge, the ER/OR bounds and one IVT
//      entry (allowed before the run; the run re-arms every monitor).
//   2. A proven run: enter ER at ER_MIN, write a 32-byte output to OR in a
//      loop, take an interrupt whose ISR is linked inside ER (PC 0xE1AC ->
//      0xE1B0, the addresses of the paper's authorized-interrupt waveform),
//      which toggles a GPIO, return, jump to ER_MAX and leave. EXEC must stay
//      1, also after leaving ER and while attestation code reads the
//      metadata and an unrelated DMA transfer runs.
//   3. One run per violation, each of which must clear EXEC in the cycle it
//      is on the bus: an interrupt served outside ER (PC 0xE1D8 -> 0xE0D6, as
//      in the paper's unauthorized-interrupt waveform), an IVT write, an ER
//      (ISR) overwrite, a DMA transfer during the run, an OR write from
//      outside ER, a DMA access to OR, a challenge overwrite, a software write
//      to the EXEC word, an entry into the middle of ER.
// Timing checked: EXEC rises exactly one cycle after the PC is at ER_MIN and
// falls in the violating cycle. Each mechanism is counted; one that never
// happened counts as a failure.
module tb_asap_hwmod;
  timeunit 1ns; timeprecision 1ps;
  import asap_pkg::*;

  localparam addr_t ER_MIN  = 16'hE19E;
  localparam addr_t ER_MAX  = 16'hE1E0;
  localparam addr_t ISR_IN  = 16'hE1B0;  // trusted ISR, linked inside ER
  localparam addr_t ISR_OUT = 16'hE0D6;  // untrusted ISR, outside ER
  localparam addr_t OR_MIN  = 16'h0200;
  localparam addr_t OR_MAX  = 16'h021F;
  localparam addr_t APP     = 16'h4400;  // untrusted application code
  localparam addr_t ATTEST  = 16'hA000;  // attestation routine
  localparam addr_t GPIO_P5 = 16'h0031;  // a peripheral register
  localparam addr_t META    = 16'h0140;  // metadata block (default map)
  localparam addr_t M_ERMIN = META + 32, M_ERMAX = META + 34;
  localparam addr_t M_ORMIN = META + 36, M_ORMAX = META + 38, M_EXEC = META + 40;

  logic         clk = 1'b0, rst_n = 1'b0;
  mcu_bus_t     bus;
  logic         exec;
  word_t        r_data;
  addr_t        er_min, er_max, or_min, or_max;
  logic [255:0] chal;
  int           checks = 0, failures = 0;
  logic         exp_exec = 1'b0;  // the value this test last expected

  typedef enum int {
    M_PROVEN_RUN, M_AUTH_IRQ, M_UNAUTH_IRQ, M_IVT_WRITE, M_ER_WRITE, M_DMA_IN_ER,
    M_OR_WRITE_OUTSIDE, M_DMA_TO_OR, M_META_WRITE, M_EXEC_WRITE, M_MID_ENTRY, M_N
  } mech_e;
  int    seen [M_N];
  string mech_name [M_N] = '{"proven run", "authorized irq", "unauthorized irq",
                             "IVT write", "ER write", "DMA during ER",
                             "OR write outside ER", "DMA to OR", "challenge write",
                             "EXEC word write", "mid-ER entry"};

  asap_hwmod dut (.clk, .rst_n, .bus, .exec, .r_data, .er_min, .er_max, .or_min, .or_max, .chal);

  always #5 clk = ~clk;

  task automatic expect_exec(logic e, string what);
    #1;
    checks++;
    if (exec !== e) begin
      failures++;
      $display("FAIL %s: t=%0t pc=%h exec=%b expected %b", what, $time, bus.pc, exec, e);
    end
  endtask

  // One bus cycle: apply after the falling edge, check EXEC, clock.
  task automatic cyc(addr_t pc, logic e, string what);
    bus.pc = pc;
    expect_exec(e, what);
    exp_exec = e;
    @(negedge clk);
    bus.w_en = 0; bus.r_en = 0; bus.dma_en = 0; bus.irq = 0;
  endtask

  task automatic cpu_write(addr_t pc, addr_t a, word_t d, logic e, string what);
    bus.w_en = 1; bus.d_addr = a; bus.d_wdata = d;
    cyc(pc, e, what);
  endtask

  task automatic dma(addr_t pc, addr_t a, logic e, string what);
    bus.dma_en = 1; bus.dma_addr = a;
    cyc(pc, e, what);
  endtask

  // Enter ER at ER_MIN: EXEC keeps its old value in that cycle (0 after a
  // violation) and is 1 from the next one.
  task automatic start_er();
    cyc(ER_MIN, exp_exec, "cycle at ER_MIN");
    cyc(ER_MIN + 2, 1'b1, "EXEC one cycle after ER_MIN");
  endtask

  // Main loop of the example task: out[i] = i + i for 32 bytes of OR.
  task automatic output_loop();
    for (int i = 0; i < 32; i++) begin
      cyc(16'hE1A4, 1'b1, "loop");
      cpu_write(16'hE1A8, OR_MIN + addr_t'(i), word_t'(2 * i), 1'b1, "ER writes OR");
      cyc(16'hE1AA, 1'b1, "loop branch");
    end
  endtask

  task automatic leave_er();
    cyc(16'hE1C0, 1'b1, "branch to exit");
    cyc(ER_MAX, 1'b1, "at ER_MAX");
    cyc(APP, 1'b1, "legal exit from ER_MAX");
  endtask

  task automatic read_meta(addr_t a, word_t exp, string what);
    bus.r_en = 1; bus.d_addr = a;
    cyc(ATTEST, exec, what);
    #1;
    checks++;
    if (r_data !== exp) begin
      failures++;
      $display("FAIL %s: read %h expected %h", what, r_data, exp);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bus = '0;
    bus.pc = APP;
    for (int i = 0; i < M_N; i++) seen[i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // 1. Setup by untrusted software.
    cyc(APP, 1'b0, "EXEC low after reset");
    for (int i = 0; i < 16; i++)
      cpu_write(APP, META + addr_t'(2 * i), word_t'(32'hC000 + i), 1'b0, "store challenge");
    cpu_write(APP, M_ERMIN, ER_MIN, 1'b0, "ER_MIN");
    cpu_write(APP, M_ERMAX, ER_MAX, 1'b0, "ER_MAX");
    cpu_write(APP, M_ORMIN, OR_MIN, 1'b0, "OR_MIN");
    cpu_write(APP, M_ORMAX, OR_MAX, 1'b0, "OR_MAX");
    cpu_write(APP, 16'hFFE4, ISR_IN, 1'b0, "IVT entry for PORT1");
    cyc(APP, 1'b0, "settle");
    checks++;
    if (er_min !== ER_MIN || er_max !== ER_MAX || or_min !== OR_MIN || or_max !== OR_MAX ||
        chal[15:0] !== 16'hC000 || chal[255:240] !== 16'hC00F) begin
      failures++; $display("FAIL metadata outputs");
    end

    // 2. Proven run with an authorized interrupt.
    start_er();
    output_loop();
    bus.irq = 1;
    cyc(16'hE1AC, 1'b1, "irq raised in main loop");
    cyc(ISR_IN, 1'b1, "authorized ISR inside ER");
    cpu_write(ISR_IN + 2, GPIO_P5, 16'h00FF, 1'b1, "ISR toggles P5OUT");
    cyc(ISR_IN + 6, 1'b1, "reti");
    seen[M_AUTH_IRQ]++;
    leave_er();
    dma(APP, 16'h1C00, 1'b1, "unrelated DMA after the run");
    read_meta(M_EXEC, 16'h0001, "attestation reads EXEC");
    read_meta(M_ERMIN, ER_MIN, "attestation reads ER_MIN");
    read_meta(M_ORMAX, OR_MAX, "attestation reads OR_MAX");
    read_meta(META + 30, 16'hC00F, "attestation reads challenge");
    cyc(APP, 1'b1, "EXEC still 1");
    if (exec) seen[M_PROVEN_RUN]++;

    // 3a. Unauthorized interrupt: ISR outside ER.
    start_er();
    cyc(16'hE1D4, 1'b1, "in ER");
    bus.irq = 1;
    cyc(16'hE1D8, 1'b1, "irq raised");
    cyc(ISR_OUT, 1'b0, "jump to ISR outside ER clears EXEC");
    cyc(ISR_OUT + 2, 1'b0, "stays cleared");
    cyc(16'hE1DA, 1'b0, "return into middle of ER stays cleared");
    cyc(ER_MAX, 1'b0, "ER_MAX does not re-arm");
    cyc(APP, 1'b0, "after exit still 0");
    seen[M_UNAUTH_IRQ]++;

    // 3b. IVT write after a good run (before attestation).
    start_er(); leave_er();
    cpu_write(APP, 16'hFFE4, ISR_OUT, 1'b0, "IVT write clears EXEC");
    cyc(APP, 1'b0, "stays cleared"); seen[M_IVT_WRITE]++;
    // and by DMA, during a run
    start_er();
    dma(APP, 16'hFFFE, 1'b0, "DMA to IVT clears EXEC");
    // (the PC left ER illegally too; both rules agree)
    cyc(APP, 1'b0, "stays cleared");

    // 3c. ER overwrite (ISR modification) after the run.
    start_er(); leave_er();
    cpu_write(APP, ISR_IN, 16'h4303, 1'b0, "write into ER clears EXEC");
    seen[M_ER_WRITE]++;

    // 3d. DMA during the run.
    start_er();
    dma(16'hE1A4, 16'h1C00, 1'b0, "DMA while PC in ER clears EXEC");
    leave_er_fail();
    seen[M_DMA_IN_ER]++;

    // 3e. OR written from outside ER after the run.
    start_er(); output_loop(); leave_er();
    cpu_write(APP, OR_MIN + 4, 16'h0BAD, 1'b0, "OR write from outside ER clears EXEC");
    seen[M_OR_WRITE_OUTSIDE]++;

    // 3f. DMA to OR after the run.
    start_er(); leave_er();
    dma(APP, OR_MAX, 1'b0, "DMA to OR clears EXEC");
    seen[M_DMA_TO_OR]++;

    // 3g. Challenge overwritten after the run.
    start_er(); leave_er();
    cpu_write(APP, META + 6, 16'h1234, 1'b0, "challenge write clears EXEC");
    seen[M_META_WRITE]++;

    // 3h. Software tries to set EXEC: ignored, and clears it.
    start_er(); leave_er();
    cpu_write(APP, M_EXEC, 16'h0001, 1'b0, "EXEC word write clears EXEC");
    read_meta(M_EXEC, 16'h0000, "EXEC reads 0 after the attempt");
    seen[M_EXEC_WRITE]++;

    // 3i. Jump into the middle of ER, skipping ER_MIN.
    start_er(); leave_er();
    cyc(16'hE1B0, 1'b0, "entry in the middle of ER clears EXEC");
    cyc(ER_MAX, 1'b0, "stays cleared");
    cyc(APP, 1'b0, "stays cleared");
    seen[M_MID_ENTRY]++;

    // Final good run: the design recovers.
    start_er(); output_loop(); leave_er();
    read_meta(M_EXEC, 16'h0001, "EXEC 1 after a clean run");
    if (exec) seen[M_PROVEN_RUN]++;

    for (int i = 0; i < M_N; i++) begin
      $display("mechanism %-20s happened %0d times", mech_name[i], seen[i]);
      checks++;
      if (seen[i] == 0) begin failures++; $display("FAIL mechanism never happened: %s", mech_name[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic leave_er_fail();
    cyc(ER_MAX, 1'b0, "at ER_MAX after violation");
    cyc(APP, 1'b0, "left ER, still 0");
  endtask
endmodule

// tb_dma_monitor: self-checking test of dma_monitor.
//
// Rule: any DMA access while the PC is inside ER clears EXEC; DMA while the
// PC is outside ER is allowed by this monitor.
// Each cycle a random bus is applied (PC, CPU write, DMA access, each drawn
// from addresses inside and outside ER, OR, the IVT and the metadata block),
// the expected EXEC vote is computed by a reference model in this file, and
// the DUT's `exec` is compared before the clock edge. ER and OR bounds are
// those of the paper's authorized-interrupt waveform (ER 0xE19E..0xE1E0)
// and an OR chosen for the test. Coverage counters make sure violations,
// restarts and runs with EXEC high all happened.
module tb_dma_monitor;
  timeunit 1ns; timeprecision 1ps;
  import asap_pkg::*;

  localparam addr_t ER_MIN = 16'hE19E;
  localparam addr_t ER_MAX = 16'hE1E0;
  localparam addr_t OR_MIN = 16'h0200;
  localparam addr_t OR_MAX = 16'h021F;

  logic     clk = 1'b0, rst_n = 1'b0;
  mcu_bus_t bus;
  logic     exec;
  int       checks = 0, failures = 0;
  int       n_viol = 0, n_restart = 0, n_exec_hi = 0;

  // reference model state
  bit    ref_run;
  bit    prev_valid;
  addr_t prev_pc;

  dma_monitor dut (.clk, .rst_n, .pc(bus.pc), .dma_en(bus.dma_en), .er_min(ER_MIN),
                  .er_max(ER_MAX), .exec);

  always #5 clk = ~clk;

  function automatic bit inr(addr_t a, addr_t lo, addr_t hi);
    return !(a < lo) && !(a > hi);
  endfunction

  // Violation as the rule states it, written independently of the RTL.
  function automatic bit ref_violation(mcu_bus_t b);
    return b.dma_en && inr(b.pc, ER_MIN, ER_MAX);
  endfunction

  function automatic addr_t pick_addr();
    unique case ($urandom_range(0, 6))
      0: return addr_t'(16'hFFE0 + $urandom_range(0, 31));
      1: return addr_t'(ER_MIN + $urandom_range(0, ER_MAX - ER_MIN));
      2: return addr_t'(OR_MIN + $urandom_range(0, OR_MAX - OR_MIN));
      3: return addr_t'(16'h0140 + $urandom_range(0, 41));
      4: return ($urandom_range(0, 1) != 0) ? 16'hFFDF : 16'h013F;
      5: return ($urandom_range(0, 1) != 0) ? ER_MIN - 1 : ER_MAX + 1;
      default: return addr_t'($urandom_range(0, 16'hFFFF));
    endcase
  endfunction

  // PC mostly walks through ER; sometimes jumps out or to the bounds.
  function automatic addr_t pick_pc(addr_t last);
    unique case ($urandom_range(0, 11))
      0: return ER_MIN;
      1: return ER_MAX;
      2: return 16'hE0D6;
      3: return addr_t'(ER_MIN + $urandom_range(1, ER_MAX - ER_MIN));
      4: return addr_t'($urandom_range(0, 16'hFFFF));
      5: return ER_MIN - 2;
      default: return (inr(last, ER_MIN, ER_MAX - 2)) ? last + 2 : last;
    endcase
  endfunction

  task automatic drive_random(int quiet);
    bus.pc       = pick_pc(bus.pc);
    bus.irq      = ($urandom_range(0, 7) == 0);
    bus.r_en     = ($urandom_range(0, 3) == 0);
    bus.w_en     = ($urandom_range(0, quiet) == 0);
    bus.d_addr   = pick_addr();
    bus.d_wdata  = 16'($urandom);
    bus.dma_en   = ($urandom_range(0, quiet) == 0);
    bus.dma_addr = pick_addr();
  endtask

  task automatic check_and_clock();
    bit v, r, e;
    #1;
    v = ref_violation(bus);
    r = (bus.pc == ER_MIN);
    e = ref_run && !v;
    checks++;
    if (exec !== e) begin
      failures++;
      if (failures < 10)
        $display("FAIL t=%0t pc=%h w=%b da=%h dma=%b dmaa=%h exec=%b expected %b",
                 $time, bus.pc, bus.w_en, bus.d_addr, bus.dma_en, bus.dma_addr, exec, e);
    end
    if (v) n_viol++;
    if (r && !v && !ref_run) n_restart++;
    if (e) n_exec_hi++;
    @(posedge clk);
    if (ref_run && v) ref_run = 1'b0;
    else if (!ref_run && r && !v) ref_run = 1'b1;
    prev_valid = 1'b1;
    prev_pc    = bus.pc;
    @(negedge clk);
  endtask

  initial begin
    #400000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bus = '0;
    bus.pc = 16'h4000;
    ref_run = 1'b0; prev_valid = 1'b0; prev_pc = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // Directed: start ER cleanly and run a few in-ER steps.
    bus.pc = ER_MIN; check_and_clock();
    for (int i = 1; i < 6; i++) begin bus.pc = ER_MIN + addr_t'(2 * i); check_and_clock(); end
    bus.pc = 16'h4000; bus.dma_en = 1; check_and_clock();
    bus.pc = ER_MIN; bus.dma_en = 0; check_and_clock();
    bus.pc = ER_MAX; bus.dma_en = 1; check_and_clock(); bus.dma_en = 0;
    for (int i = 0; i < 20000; i++) begin
      drive_random((i / 2000) % 2 == 0 ? 12 : 3);
      check_and_clock();
    end
    if (n_viol == 0)    begin failures++; $display("FAIL no violation exercised"); end
    if (n_restart == 0) begin failures++; $display("FAIL no restart exercised"); end
    if (n_exec_hi == 0) begin failures++; $display("FAIL EXEC never high"); end
    $display("coverage: violations=%0d restarts=%0d exec_high_cycles=%0d", n_viol, n_restart, n_exec_hi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

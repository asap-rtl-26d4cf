// tb_asap_waveforms: replays the two ASAP interrupt experiments on the top
// module at its default parameters, using the ER bounds and PC values of the
// published waveforms.
//   Trusted interrupt:   ER = 0xE19E..0xE1E0. The PC runs 0xE1A4, 0xE1A8,
//                        0xE1AA, 0xE1AC; irq is raised and the PC jumps to
//                        the ISR at 0xE1B0, inside ER. EXEC must stay 1.
//   Untrusted interrupt: ER = 0xE1C6..0xE1E0. The PC runs 0xE1D4, 0xE1D8;
//                        irq is raised and the PC jumps to the ISR at 0xE0D6,
//                        outside ER, then 0xE0D8. EXEC must be 0 from the
//                        first cycle at 0xE0D6.
// Each PC value is held for two cycles, as a multi-cycle instruction would be.
// The bounds are written through the metadata registers by code outside ER
// before each run, and the run is entered at ER_MIN.
module tb_asap_waveforms;
  timeunit 1ns; timeprecision 1ps;
  import asap_pkg::*;

  logic         clk = 1'b0, rst_n = 1'b0;
  mcu_bus_t     bus;
  logic         exec;
  word_t        r_data;
  addr_t        er_min, er_max, or_min, or_max;
  logic [255:0] chal;
  int           checks = 0, failures = 0, n_trusted = 0, n_untrusted = 0;

  asap_hwmod dut (.clk, .rst_n, .bus, .exec, .r_data, .er_min, .er_max, .or_min, .or_max, .chal);

  always #5 clk = ~clk;

  task automatic hold(addr_t pc, logic irq, logic e, int cycles, string what);
    for (int i = 0; i < cycles; i++) begin
      bus.pc = pc; bus.irq = irq;
      #1;
      checks++;
      if (exec !== e) begin
        failures++;
        $display("FAIL %s: pc=%h exec=%b expected %b", what, pc, exec, e);
      end
      @(negedge clk);
    end
    bus.w_en = 1'b0;
  endtask

  task automatic set_er(addr_t lo, addr_t hi);
    bus.w_en = 1; bus.d_addr = 16'h0160; bus.d_wdata = lo; hold(16'h4400, 0, 0, 1, "write ER_MIN");
    bus.w_en = 1; bus.d_addr = 16'h0162; bus.d_wdata = hi; hold(16'h4400, 0, 0, 1, "write ER_MAX");
    checks++;
    if (er_min !== lo || er_max !== hi) begin failures++; $display("FAIL bounds not stored"); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bus = '0; bus.pc = 16'h4400;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // Trusted interrupt.
    set_er(16'hE19E, 16'hE1E0);
    hold(16'hE19E, 0, 0, 1, "enter at ER_MIN");
    hold(16'hE1A0, 0, 1, 2, "main");
    hold(16'hE1A4, 0, 1, 2, "main");
    hold(16'hE1A8, 0, 1, 2, "main");
    hold(16'hE1AA, 0, 1, 2, "main");
    hold(16'hE1AC, 1, 1, 2, "irq in main");
    hold(16'hE1B0, 0, 1, 4, "trusted ISR at 0xE1B0");
    hold(16'hE1E0, 0, 1, 2, "ER_MAX");
    hold(16'h4400, 0, 1, 2, "after exit");
    if (exec) n_trusted++;

    // Untrusted interrupt.
    set_er(16'hE1C6, 16'hE1E0);
    hold(16'hE1C6, 0, 0, 1, "enter at ER_MIN");
    hold(16'hE1D4, 0, 1, 2, "main");
    hold(16'hE1D8, 1, 1, 2, "irq in main");
    hold(16'hE0D6, 0, 0, 2, "untrusted ISR at 0xE0D6");
    hold(16'hE0D8, 0, 0, 2, "untrusted ISR");
    hold(16'hE1DA, 0, 0, 2, "back in ER");
    hold(16'hE1E0, 0, 0, 2, "ER_MAX");
    hold(16'h4400, 0, 0, 2, "after exit");
    if (!exec) n_untrusted++;

    checks += 2;
    if (n_trusted == 0)   begin failures++; $display("FAIL trusted case did not end with EXEC=1"); end
    if (n_untrusted == 0) begin failures++; $display("FAIL untrusted case did not end with EXEC=0"); end
    $display("trusted interrupt runs: %0d, untrusted interrupt runs: %0d", n_trusted, n_untrusted);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

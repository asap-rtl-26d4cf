// tb_exec_fsm: self-checking test of the Run/NotExec machine.
//
// Drives random `violation` and `restart` bits (plus a directed opening
// sequence) and compares `exec` every cycle with a reference model written
// as plain if/else on a single bit. Checks that EXEC is low in the cycle of a
// violation, that a restart without violation re-arms one cycle later, and
// that reset leaves the machine in NotExec.
module tb_exec_fsm;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 1'b0, rst_n = 1'b0, violation = 1'b0, restart = 1'b0, exec;
  int checks = 0, failures = 0;
  bit ref_run;  // reference state: 1 = Run

  exec_fsm dut (.clk, .rst_n, .violation, .restart, .exec);

  always #5 clk = ~clk;

  task automatic check(string what);
    logic exp = ref_run && !violation;
    checks++;
    if (exec !== exp) begin
      failures++;
      $display("FAIL %s: t=%0t viol=%b restart=%b exec=%b expected %b", what, $time, violation, restart, exec, exp);
    end
  endtask

  // One cycle: apply inputs after the falling edge, check, then update model.
  task automatic step(logic v, logic r, string what);
    @(negedge clk);
    violation = v; restart = r;
    #1 check(what);
    @(posedge clk);
    if (!ref_run && r && !v) ref_run = 1'b1;
    else if (ref_run && v)   ref_run = 1'b0;
  endtask

  initial begin
    #20000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_run = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    step(0, 0, "after reset NotExec");
    step(0, 0, "stays NotExec");
    step(1, 1, "restart blocked by violation");
    step(0, 0, "still NotExec");
    step(0, 1, "restart cycle itself still 0");
    step(0, 0, "Run one cycle after restart");
    step(0, 0, "Run holds");
    step(1, 0, "violation clears in same cycle");
    step(0, 0, "NotExec after violation");
    step(0, 1, "restart again");
    step(0, 0, "Run again");
    for (int i = 0; i < 1000; i++) begin
      logic v, r;
      v = ($urandom_range(0, 9) == 0);
      r = ($urandom_range(0, 4) == 0);
      step(v, r, "random");
    end
    // Reset from Run returns to NotExec.
    step(0, 1, "pre-reset restart");
    step(0, 0, "pre-reset run");
    @(negedge clk) rst_n = 1'b0;
    @(posedge clk); ref_run = 1'b0;
    @(negedge clk) rst_n = 1'b1;
    step(0, 0, "reset from Run gives NotExec");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_meta_regs: self-checking test of the metadata register block.
//
// A reference copy of the 21 metadata words (16 challenge words, ER_MIN,
// ER_MAX, OR_MIN, OR_MAX, EXEC) is kept in this file. The test checks the
// reset values, then issues random word writes and reads across the block
// and just outside it, and compares every read (one cycle after r_en), the
// bound outputs and the packed challenge with the reference. Writes to the
// EXEC word must be ignored, and reading it must return the `exec` input.
module tb_meta_regs;
  timeunit 1ns; timeprecision 1ps;
  import asap_pkg::*;

  localparam addr_t BASE = 16'h0140;
  localparam int    NW   = 21;

  logic         clk = 1'b0, rst_n = 1'b0;
  mcu_bus_t     bus;
  logic         exec;
  word_t        r_data;
  addr_t        er_min, er_max, or_min, or_max;
  logic [255:0] chal;
  int           checks = 0, failures = 0;
  int           n_exec_wr = 0, n_reads = 0;
  word_t        refm [NW];

  meta_regs dut (.clk, .rst_n, .bus, .exec, .r_data, .er_min, .er_max, .or_min, .or_max, .chal);

  always #5 clk = ~clk;

  task automatic expect16(string what, word_t got, word_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic check_outputs();
    logic [255:0] c;
    for (int i = 0; i < 16; i++) c[16*i +: 16] = refm[i];
    expect16("er_min", er_min, refm[16]);
    expect16("er_max", er_max, refm[17]);
    expect16("or_min", or_min, refm[18]);
    expect16("or_max", or_max, refm[19]);
    checks++;
    if (chal !== c) begin failures++; $display("FAIL chal %h expected %h", chal, c); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bus = '0; exec = 1'b0;
    for (int i = 0; i < NW; i++) refm[i] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check_outputs();
    for (int n = 0; n < 5000; n++) begin
      int    k;
      addr_t a;
      bit    wr;
      word_t d;
      k  = int'($urandom_range(0, NW + 3)) - 2;
      a  = addr_t'(int'(BASE) + 2 * k);
      wr = $urandom_range(0, 1) != 0;
      d  = word_t'($urandom);
      @(negedge clk);
      exec       = $urandom_range(0, 1) != 0;
      bus        = '0;
      bus.d_addr = a | addr_t'($urandom_range(0, 1));  // odd byte address names the same word
      bus.w_en   = wr;
      bus.r_en   = !wr;
      bus.d_wdata = d;
      @(posedge clk);
      if (wr && k >= 0 && k < NW - 1) refm[k] = d;
      if (wr && k == NW - 1) n_exec_wr++;
      #1;
      if (!wr) begin
        n_reads++;
        if (k >= 0 && k < NW - 1) expect16("read", r_data, refm[k]);
        else if (k == NW - 1)     expect16("read exec", r_data, {15'b0, exec});
        else                      expect16("read outside", r_data, 16'h0000);
      end
      check_outputs();
    end
    if (n_exec_wr == 0) begin failures++; $display("FAIL no EXEC write tried"); end
    $display("coverage: exec_word_writes=%0d reads=%0d", n_exec_wr, n_reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

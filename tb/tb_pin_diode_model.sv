// tb_pin_diode_model - self-checking test of the pin_diode_model behavioural switch model
// at its default, full published switching time (800 ns) and a 100 MHz clock.
//
// Checks: the switch stays open after reset; it closes exactly 80 clock
// cycles (800 ns) after the control rises and opens exactly as long after
// the control falls; rf_out is rf_in gated by the switch state; a control
// pulse shorter than the switching time does not move the switch.
`timescale 1ns/1ps
module tb_pin_diode_model;

  localparam int unsigned CLK_HZ = 100000000;
  localparam int unsigned NS     = 800;
  localparam int          EXP    = 80;   // NS * CLK_HZ / 1e9, worked out by hand

  logic clk = 1'b0, rst_n = 1'b0, ctrl = 1'b0, rf_in = 1'b1;
  logic rf_out, closed;
  int   checks = 0, failures = 0;
  longint cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  pin_diode_model dut (.clk, .rst_n, .ctrl_close(ctrl),
    .rf_in, .rf_out, .closed);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b at cycle %0d", what, got, exp, cyc);
    end
  endtask

  // drive ctrl to v, then count edges until closed follows
  task automatic measure(logic v, output int n);
    @(negedge clk) ctrl = v;
    n = 0;
    while (closed !== v && n < 2 * EXP + 10) begin
      @(posedge clk); n++;
      #1;
    end
  endtask

  initial begin
    int n;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (5) @(posedge clk);
    check("open after reset", closed, 1'b0);
    check("no RF while open", rf_out, 1'b0);

    measure(1'b1, n);
    checks++;
    if (n != EXP) begin failures++; $display("FAIL close time %0d cycles, expected %0d", n, EXP); end
    check("closed", closed, 1'b1);
    check("RF passes when closed", rf_out, 1'b1);
    @(negedge clk) rf_in = 1'b0;
    #1 check("rf_out follows rf_in", rf_out, 1'b0);
    @(negedge clk) rf_in = 1'b1;

    measure(1'b0, n);
    checks++;
    if (n != EXP) begin failures++; $display("FAIL open time %0d cycles, expected %0d", n, EXP); end
    check("opened", closed, 1'b0);
    check("RF blocked when open", rf_out, 1'b0);

    // a pulse shorter than the switching time must not close the switch
    @(negedge clk) ctrl = 1'b1;
    repeat (EXP / 2) @(posedge clk);
    @(negedge clk) ctrl = 1'b0;
    repeat (EXP + 5) @(posedge clk);
    check("short pulse ignored", closed, 1'b0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

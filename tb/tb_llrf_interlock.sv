// tb_llrf_interlock - self-checking test of the LLRF fast interlock.
//
// Directed checks: every power channel trips the permit exactly 2 cycles
// after an over-threshold reading (and a reading equal to the threshold
// does not trip); every arc detector trips it exactly 3 cycles after the
// contact closes; both signs of a cavity/drive discrepancy drop the
// Oscillation Permit without touching the LLRF permit; faults stay latched
// until ilk_reset and survive a reset while their cause persists; the RF
// drive output needs drive_on and the master-interlock permit.
// The measured latencies are also held against the 6 us LLRF response
// requirement at the 100 MHz clock.  A random phase compares the latched
// power-fault word with the expected word worked out in the testbench.
`timescale 1ns/1ps
module tb_llrf_interlock;
  import eps_pkg::*;

  localparam int unsigned N_PWR = 8, PWR_W = 16;
  localparam real CLK_NS = 10.0;

  logic             clk = 1'b0, rst_n = 1'b0;
  logic [N_ARC-1:0] arc_detect = '0;
  logic [PWR_W-1:0] rf_power [N_PWR], power_limit [N_PWR];
  logic [PWR_W-1:0] cav_power = 16'd1000, drive_power = 16'd1000, osc_limit = 16'd100;
  logic             mi_plc_permit = 1'b0, ilk_reset = 1'b0, drive_on = 1'b0;
  logic             llrf_permit, osc_permit, rf_drive_out, osc_fault;
  logic [N_ARC-1:0] arc_fault;
  logic [N_PWR-1:0] power_fault;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  llrf_interlock dut (.*);

  initial begin : watchdog
    repeat (200_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b at %0t", what, got, exp, $time);
    end
  endtask

  task automatic check_int(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // count rising edges until sig reaches v (gives up after 50)
  task automatic edges_until(ref logic sig, input logic v, output int n);
    n = 0;
    while (sig !== v && n < 50) begin
      @(posedge clk); n++;
      #1;
    end
  endtask

  task automatic pulse_reset();
    @(negedge clk) ilk_reset = 1'b1;
    @(negedge clk) ilk_reset = 1'b0;
    repeat (2) @(posedge clk);
    #1;
  endtask

  task automatic all_nominal();
    for (int i = 0; i < N_PWR; i++) begin
      rf_power[i]    = 16'd100 * 16'(i + 1);
      power_limit[i] = 16'd5000;
    end
  endtask

  initial begin
    int n;
    all_nominal();
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (4) @(posedge clk);
    #1;
    check("permit after reset", llrf_permit, 1'b1);
    check("osc permit after reset", osc_permit, 1'b1);

    // ---- power thresholds, each channel ----
    for (int i = 0; i < N_PWR; i++) begin
      @(negedge clk) rf_power[i] = power_limit[i];     // equal: no trip
      repeat (4) @(posedge clk);
      #1 check($sformatf("no trip at threshold ch%0d", i), llrf_permit, 1'b1);
      @(negedge clk) rf_power[i] = power_limit[i] + 16'd1;
      edges_until(llrf_permit, 1'b0, n);
      check_int($sformatf("power trip latency ch%0d", i), n, 2);
      checks++;
      if (real'(n) * CLK_NS > real'(LLRF_RESPONSE_NS)) begin
        failures++; $display("FAIL response exceeds 6 us");
      end
      check_int($sformatf("power fault word ch%0d", i), power_fault, 1 << i);
      check("osc permit untouched", osc_permit, 1'b1);
      @(negedge clk) rf_power[i] = 16'd10;
      repeat (5) @(posedge clk);
      #1 check("latched after cause gone", llrf_permit, 1'b0);
      pulse_reset();
      check($sformatf("cleared by reset ch%0d", i), llrf_permit, 1'b1);
    end

    // reset while the cause persists does not clear
    @(negedge clk) rf_power[3] = 16'hFFFF;
    repeat (4) @(posedge clk);
    pulse_reset();
    check("reset ignored while over threshold", llrf_permit, 1'b0);
    @(negedge clk) rf_power[3] = 16'd0;
    repeat (3) @(posedge clk);
    pulse_reset();
    check("cleared once cause gone", llrf_permit, 1'b1);

    // ---- arc detectors ----
    for (int a = 0; a < N_ARC; a++) begin
      @(negedge clk) arc_detect[a] = 1'b1;
      edges_until(llrf_permit, 1'b0, n);
      check_int($sformatf("arc trip latency det%0d", a), n, 3);
      check_int($sformatf("arc fault word det%0d", a), arc_fault, 1 << a);
      @(negedge clk) arc_detect[a] = 1'b0;
      repeat (5) @(posedge clk);
      #1 check("arc latched", llrf_permit, 1'b0);
      pulse_reset();
      check("arc cleared", llrf_permit, 1'b1);
    end

    // ---- oscillation permit: cavity vs drive discrepancy ----
    @(negedge clk) begin cav_power = 16'd1100; drive_power = 16'd1000; end  // diff == limit
    repeat (4) @(posedge clk);
    #1 check("no osc trip at limit", osc_permit, 1'b1);
    @(negedge clk) cav_power = 16'd1101;
    edges_until(osc_permit, 1'b0, n);
    check_int("osc trip latency (cav > drive)", n, 2);
    check("llrf permit unaffected by osc", llrf_permit, 1'b1);
    check("osc fault flag", osc_fault, 1'b1);
    @(negedge clk) cav_power = 16'd1000;
    repeat (3) @(posedge clk);
    pulse_reset();
    check("osc cleared", osc_permit, 1'b1);
    @(negedge clk) drive_power = 16'd2000;   // drive > cavity
    edges_until(osc_permit, 1'b0, n);
    check_int("osc trip latency (drive > cav)", n, 2);
    @(negedge clk) drive_power = 16'd1000;
    repeat (3) @(posedge clk);
    pulse_reset();
    check("osc cleared again", osc_permit, 1'b1);

    // ---- RF drive output gating ----
    @(negedge clk) drive_on = 1'b1;
    repeat (4) @(posedge clk);
    #1 check("no drive without master permit", rf_drive_out, 1'b0);
    @(negedge clk) mi_plc_permit = 1'b1;
    edges_until(rf_drive_out, 1'b1, n);
    check_int("master permit sync latency", n, 2);
    @(negedge clk) rf_power[0] = 16'hFFFF;
    edges_until(llrf_permit, 1'b0, n);
    check("own fault leaves drive to the drive chassis", rf_drive_out, 1'b1);
    @(negedge clk) rf_power[0] = 16'd0;
    repeat (3) @(posedge clk);
    pulse_reset();
    @(negedge clk) mi_plc_permit = 1'b0;
    edges_until(rf_drive_out, 1'b0, n);
    check_int("drive removed by master permit", n, 2);
    @(negedge clk) mi_plc_permit = 1'b1;
    repeat (3) @(posedge clk);
    #1 check("drive back", rf_drive_out, 1'b1);
    @(negedge clk) drive_on = 1'b0;
    #1 check("drive follows drive_on", rf_drive_out, 1'b0);

    // ---- random: latched power-fault word ----
    for (int t = 0; t < 300; t++) begin
      logic [N_PWR-1:0] exp_word;
      @(negedge clk);
      for (int i = 0; i < N_PWR; i++) begin
        rf_power[i]    = 16'($urandom_range(0, 4000));
        power_limit[i] = 16'($urandom_range(2000, 8000));
        exp_word[i]    = rf_power[i] > power_limit[i];
      end
      repeat (3) @(posedge clk);
      #1 check_int("random power fault word", power_fault, exp_word);
      check("random permit", llrf_permit, exp_word == '0);
      @(negedge clk) all_nominal();
      repeat (2) @(posedge clk);
      pulse_reset();
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_ar_rf_eps - end-to-end test of the two-cavity RF protection system at
// its default parameters (100 MHz clock, 1 ms interlock scan, 800 ns PIN
// diode, 20 ms coaxial switches).
//
// The system is brought up (interlocks reset, TX ON, all switches closed)
// until RF drive reaches both amplifiers.  Then each protection mechanism
// is made to act at least once, RF is restored after each, and the number
// of times each happened is counted; a mechanism that never happened counts
// as a failure:
//   mps_trip      MPS permit lost -> PIN diode cuts RF 800 ns later
//   mps_bypass    same loss in an RF test mode -> RF stays on
//   arc_trip      LLRF arc detector -> RF cut 830 ns later, that cavity only
//   power_trip    LLRF power above threshold -> RF cut 820 ns later
//   osc_trip      cavity/drive discrepancy -> Oscillation Permit to HPA lost
//   slow_trip     vacuum fault -> cut within one scan + 820 ns (< 10 ms)
//   hpa_fault     HPA fault -> HPA permit and RF drive removed
//   tx_off        operator TX OFF -> RF removed
//   pps_chain     PPS chain switch opened -> RF gone after 20 ms
//   key_invalid   key switch between positions -> interlock, no bypass
//   reset_recover latched interlock cleared and RF restored
// Expected latencies are worked out from the published switching times and
// the design's documented pipeline depths, not read from the design.
`timescale 1ns/1ps
module tb_ar_rf_eps;
  import eps_pkg::*;

  localparam int unsigned NC = 2, NP = 8, W = 16;
  localparam longint SCAN = 100_000;          // 1 ms in 10 ns cycles
  localparam longint PIN  = 80;               // 800 ns
  localparam longint COAX = 2_000_000;        // 20 ms
  localparam longint LLRF_REQ = LLRF_RESPONSE_NS / 10;
  localparam longint MI_REQ   = MI_RESPONSE_NS / 10;
  localparam longint MPS_REQ  = MPS_RESPONSE_NS / 10;

  logic clk = 1'b0, rst_n = 1'b0;
  logic mps_permit_a = 1, mps_permit_b = 1, pps_permit = 1;
  logic [3:0] key_sw = 4'b0001;
  logic [NC-1:0] pps_chain_a_close = '1, pps_chain_b_close = '1;
  logic [N_ARC-1:0] arc_detect [NC];
  logic [W-1:0] rf_power [NC][NP], power_limit [NC][NP];
  logic [W-1:0] cav_power [NC], drive_power [NC], osc_limit [NC];
  logic [NC-1:0] llrf_drive_on = '1;
  logic [NC-1:0] hpa_fault = '0, vacuum_ok = '1, feeder_ok = '1, rf_switch_ok = '1;
  logic [NC-1:0] cavity_ok = '1, tuner_ok = '1;
  logic [NC-1:0] tx_on_cmd = '0, tx_off_cmd = '0, reset_cmd = '0;
  logic [NC-1:0] rf_drive_to_hpa, hpa_pmt, osc_permit;
  rf_mode_e rf_mode;
  logic rf_test_mode, mode_valid, scan_tick;
  logic [NC-1:0] llrf_permit, mi_drive_pmt, transmit_on, rf_drive_permit, mps_bypassed;
  logic [NC-1:0] pin_closed, coax_closed, chain_a_closed, chain_b_closed, osc_fault;
  mi_ilk_t ilk_latched [NC];
  logic [N_ARC-1:0] arc_fault [NC];
  logic [NP-1:0] power_fault [NC];

  int checks = 0, failures = 0;
  int n_mps_trip = 0, n_mps_bypass = 0, n_arc = 0, n_power = 0, n_osc = 0, n_slow = 0;
  int n_hpa = 0, n_tx_off = 0, n_pps_chain = 0, n_key = 0, n_recover = 0;

  always #5 clk = ~clk;

  ar_rf_eps dut (.*);

  initial begin : watchdog
    repeat (80_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
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

  task automatic check_range(string what, longint got, longint lo, longint hi);
    checks++;
    if (got < lo || got > hi) begin
      failures++;
      $display("FAIL %s: %0d cycles, expected %0d..%0d", what, got, lo, hi);
    end
  endtask

  // rising edges until RF at the HPA input of cavity c equals v
  task automatic wait_rf(int c, logic v, longint maxc, output longint n);
    n = 0;
    while (rf_drive_to_hpa[c] !== v && n < maxc) begin
      @(posedge clk); n++; #1;
    end
  endtask

  task automatic pulse_all(ref logic [NC-1:0] sig);
    @(negedge clk) sig = '1;
    @(negedge clk) sig = '0;
  endtask

  // reset interlocks, TX ON, and wait until RF reaches both HPAs again
  task automatic recover(string after);
    longint n0, n1;
    repeat (2 * SCAN) @(posedge clk);
    pulse_all(reset_cmd);
    repeat (SCAN + 10) @(posedge clk);
    pulse_all(tx_on_cmd);
    wait_rf(0, 1'b1, 3 * COAX, n0);
    wait_rf(1, 1'b1, 3 * COAX, n1);
    check($sformatf("RF restored cav0 after %s", after), rf_drive_to_hpa[0], 1'b1);
    check($sformatf("RF restored cav1 after %s", after), rf_drive_to_hpa[1], 1'b1);
    if (rf_drive_to_hpa == '1) n_recover++;
  endtask

  initial begin
    longint n;
    for (int c = 0; c < NC; c++) begin
      arc_detect[c] = '0;
      for (int i = 0; i < NP; i++) begin
        rf_power[c][i]    = W'(500 + 100 * i);
        power_limit[c][i] = 16'd4000;
      end
      cav_power[c] = 16'd2000; drive_power[c] = 16'd2000; osc_limit[c] = 16'd200;
    end

    repeat (5) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // ---- start-up ----
    repeat (2 * SCAN) @(posedge clk);
    check("HPA permit after start", hpa_pmt[0], 1'b1);
    check("no RF before TX ON", rf_drive_to_hpa[0], 1'b0);
    pulse_all(tx_on_cmd);
    wait_rf(0, 1'b1, 3 * COAX, n);
    // TX ON is seen at the next scan, then the coaxial switches need 20 ms
    check_range("start-up: TX ON to RF at HPA", n, COAX, COAX + SCAN + 10);
    wait_rf(1, 1'b1, 10, n);
    check("RF at HPA cav1", rf_drive_to_hpa[1], 1'b1);

    // ---- MPS trip: primary mitigation via PIN diode ----
    @(negedge clk) mps_permit_a = 1'b0;
    wait_rf(0, 1'b0, 2 * SCAN, n);
    check_range("MPS trip: RF cut by PIN diode", n, PIN, PIN);
    check_range("MPS trip within 20 ms", n, 0, MPS_REQ);
    check("MPS trip cav1", rf_drive_to_hpa[1], 1'b0);
    if (n == PIN) n_mps_trip++;
    @(negedge clk) mps_permit_a = 1'b1;
    recover("MPS trip");

    // ---- MPS bypass in RF Test mode ----
    @(negedge clk) key_sw = 4'b0010;
    repeat (2 * SCAN) @(posedge clk);
    check("test mode decoded", rf_test_mode, 1'b1);
    @(negedge clk) mps_permit_b = 1'b0;
    repeat (3 * SCAN) @(posedge clk);
    check("MPS bypassed: RF stays cav0", rf_drive_to_hpa[0], 1'b1);
    check("MPS bypassed: RF stays cav1", rf_drive_to_hpa[1], 1'b1);
    check("bypass status", mps_bypassed[0], 1'b1);
    if (rf_drive_to_hpa == '1 && mps_bypassed[0]) n_mps_bypass++;
    // leaving test mode with MPS still down cuts RF at once
    @(negedge clk) key_sw = 4'b0001;
    wait_rf(0, 1'b0, 2 * SCAN, n);
    check_range("leaving test mode with MPS down", n, PIN, PIN);
    @(negedge clk) mps_permit_b = 1'b1;
    recover("MPS bypass");

    // ---- LLRF arc on cavity 1 ----
    @(negedge clk) arc_detect[1][ARC_CIRC_LOAD] = 1'b1;
    wait_rf(1, 1'b0, 2 * SCAN, n);
    check_range("arc: RF cut (sync 2 + latch 1 + PIN)", n, PIN + 3, PIN + 3);
    check_range("arc within 6 us LLRF requirement", n, 0, LLRF_REQ);
    check("arc: other cavity keeps RF", rf_drive_to_hpa[0], 1'b1);
    check("arc fault status", arc_fault[1][ARC_CIRC_LOAD], 1'b1);
    if (n == PIN + 3) n_arc++;
    @(negedge clk) arc_detect[1] = '0;
    repeat (2 * SCAN) @(posedge clk);
    check("master interlock latched LLRF permit loss", ilk_latched[1].llrf, 1'b1);
    recover("arc");

    // ---- LLRF power threshold on cavity 0 ----
    @(negedge clk) rf_power[0][5] = 16'd4001;
    wait_rf(0, 1'b0, 2 * SCAN, n);
    check_range("power: RF cut (compare 1 + latch 1 + PIN)", n, PIN + 2, PIN + 2);
    check("power: other cavity keeps RF", rf_drive_to_hpa[1], 1'b1);
    if (n == PIN + 2) n_power++;
    @(negedge clk) rf_power[0][5] = 16'd1000;
    recover("power");

    // ---- oscillation permit on cavity 1 ----
    @(negedge clk) cav_power[1] = 16'd1500;   // 500 below the drive
    repeat (3) @(posedge clk);
    #1 check("osc permit to HPA dropped", osc_permit[1], 1'b0);
    check("osc permit cav0 kept", osc_permit[0], 1'b1);
    if (!osc_permit[1]) n_osc++;
    @(negedge clk) cav_power[1] = 16'd2000;
    repeat (3) @(posedge clk);
    pulse_all(reset_cmd);
    repeat (3) @(posedge clk);
    #1 check("osc permit restored", osc_permit[1], 1'b1);

    // ---- slow interlock: vacuum on cavity 0 ----
    @(negedge clk) vacuum_ok[0] = 1'b0;
    wait_rf(0, 1'b0, 3 * SCAN, n);
    check_range("vacuum: RF cut within scan + PIN", n, PIN, SCAN + 2 + PIN + 1);
    check_range("vacuum within 10 ms", n, 0, MI_REQ);
    check("vacuum: HPA permit", hpa_pmt[0], 1'b0);
    check("vacuum: other cavity keeps RF", rf_drive_to_hpa[1], 1'b1);
    if (rf_drive_to_hpa[0] == 1'b0 && ilk_latched[0].vacuum) n_slow++;
    @(negedge clk) vacuum_ok[0] = 1'b1;
    recover("vacuum");

    // ---- HPA fault on cavity 1 ----
    @(negedge clk) hpa_fault[1] = 1'b1;
    wait_rf(1, 1'b0, 3 * SCAN, n);
    check_range("HPA fault: RF cut", n, PIN, SCAN + 2 + PIN + 1);
    check("HPA fault: HPA permit removed", hpa_pmt[1], 1'b0);
    if (!hpa_pmt[1]) n_hpa++;
    @(negedge clk) hpa_fault[1] = 1'b0;
    recover("HPA fault");

    // ---- TX OFF on cavity 0 ----
    @(negedge clk) tx_off_cmd[0] = 1'b1;
    @(negedge clk) tx_off_cmd[0] = 1'b0;
    wait_rf(0, 1'b0, 3 * SCAN, n);
    check("TX OFF: RF removed", rf_drive_to_hpa[0], 1'b0);
    check("TX OFF: HPA permit kept", hpa_pmt[0], 1'b1);
    if (!rf_drive_to_hpa[0] && hpa_pmt[0]) n_tx_off++;
    recover("TX OFF");

    // ---- PPS chain B switch of cavity 1 opened ----
    @(negedge clk) pps_chain_b_close[1] = 1'b0;
    wait_rf(1, 1'b0, 3 * COAX, n);
    check_range("PPS chain: RF gone after coax switching time", n, COAX, COAX);
    if (n == COAX) n_pps_chain++;
    @(negedge clk) pps_chain_b_close[1] = 1'b1;
    recover("PPS chain");

    // ---- key switch between positions ----
    @(negedge clk) key_sw = 4'b0000;
    #1 check("invalid key: no test mode", rf_test_mode, 1'b0);
    check("invalid key flagged", mode_valid, 1'b0);
    wait_rf(0, 1'b0, 3 * SCAN, n);
    check("invalid key: RF removed", rf_drive_to_hpa[0], 1'b0);
    check("invalid key status", ilk_latched[0].mode, 1'b1);
    if (ilk_latched[0].mode) n_key++;
    @(negedge clk) key_sw = 4'b0001;
    recover("key switch");

    // ---- every mechanism happened at least once ----
    $display("mechanisms: mps_trip=%0d mps_bypass=%0d arc_trip=%0d power_trip=%0d osc_trip=%0d slow_trip=%0d",
             n_mps_trip, n_mps_bypass, n_arc, n_power, n_osc, n_slow);
    $display("            hpa_fault=%0d tx_off=%0d pps_chain=%0d key_invalid=%0d reset_recover=%0d",
             n_hpa, n_tx_off, n_pps_chain, n_key, n_recover);
    begin
      int cnt [11];
      cnt = '{n_mps_trip, n_mps_bypass, n_arc, n_power, n_osc, n_slow,
              n_hpa, n_tx_off, n_pps_chain, n_key, n_recover};
      for (int i = 0; i < 11; i++) begin
        checks++;
        if (cnt[i] == 0) begin
          failures++;
          $display("FAIL mechanism %0d never happened", i);
        end
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

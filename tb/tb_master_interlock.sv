// tb_master_interlock - self-checking test of the slow master interlock at
// its default parameters (100 MHz clock, 1 ms scan).
//
// For each of the ten slow interlocks, on each cavity: with RF transmitting,
// the interlock is tripped; the drive, LLRF and HPA permits of that cavity
// must drop within one scan plus the synchronizer (and so within the 10 ms
// requirement), only the matching status bit may latch, and the other
// cavity must be unaffected.  The interlock must stay latched after its
// cause goes, ignore a reset while the cause persists, clear on reset once
// the cause has gone, and transmit must need a new TX ON.  Also checked:
// TX ON refused while a fault is latched, TX OFF keeping the HPA permit,
// the MPS bypass in an RF test mode, and a one-cycle command pulse being
// caught between scans.
`timescale 1ns/1ps
module tb_master_interlock;
  import eps_pkg::*;

  localparam int unsigned NC      = 2;
  localparam int          SCAN    = 100_000;          // 1 ms at 100 MHz
  localparam int          MAX_LAT = SCAN + 3;
  localparam longint      REQ_CYC = MI_RESPONSE_NS / 10;

  logic clk = 1'b0, rst_n = 1'b0;
  logic mps_permit_a = 1, mps_permit_b = 1, pps_permit = 1, rf_test_mode = 0, mode_valid = 1;
  logic [NC-1:0] llrf_permit = '1, hpa_fault = '0, vacuum_ok = '1, feeder_ok = '1;
  logic [NC-1:0] rf_switch_ok = '1, cavity_ok = '1, tuner_ok = '1;
  logic [NC-1:0] tx_on_cmd = '0, tx_off_cmd = '0, reset_cmd = '0;
  logic [NC-1:0] llrf_slow_pmt, hpa_pmt, rf_drive_pmt, transmit_on;
  mi_ilk_t       ilk_latched [NC];
  logic          scan_tick;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  master_interlock dut (.*);

  initial begin : watchdog
    repeat (20_000_000) @(posedge clk);
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

  task automatic scans(int n);
    repeat (n) @(posedge scan_tick);
    @(posedge clk); #1;
  endtask

  task automatic pulse(ref logic [NC-1:0] sig, input int c);
    @(negedge clk) sig[c] = 1'b1;
    @(negedge clk) sig[c] = 1'b0;
  endtask

  // set interlock k of cavity c to bad (1) or good (0)
  task automatic set_ilk(int k, int c, logic bad);
    case (k)
      0: pps_permit      = ~bad;
      1: mps_permit_b    = ~bad;
      2: mode_valid      = ~bad;
      3: vacuum_ok[c]    = ~bad;
      4: feeder_ok[c]    = ~bad;
      5: rf_switch_ok[c] = ~bad;
      6: cavity_ok[c]    = ~bad;
      7: tuner_ok[c]     = ~bad;
      8: hpa_fault[c]    = bad;
      9: llrf_permit[c]  = ~bad;
      default: ;
    endcase
  endtask

  // expected status word with only interlock k set (order of mi_ilk_t)
  function automatic mi_ilk_t ilk_word(int k);
    logic [MI_ILK_W-1:0] w;
    w = '0;
    w[MI_ILK_W-1-k] = 1'b1;
    return mi_ilk_t'(w);
  endfunction

  function automatic bit shared(int k);
    return k <= 2;   // PPS, MPS, key switch act on both cavities
  endfunction

  initial begin
    int n;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    scans(2);
    check("HPA permit with all OK", hpa_pmt[0], 1'b1);
    check("no drive before TX ON", rf_drive_pmt[0], 1'b0);

    // one-cycle TX ON pulses, caught between scans
    pulse(tx_on_cmd, 0);
    pulse(tx_on_cmd, 1);
    scans(1);
    for (int c = 0; c < NC; c++) begin
      check($sformatf("transmit on cav%0d", c), transmit_on[c], 1'b1);
      check($sformatf("drive permit cav%0d", c), rf_drive_pmt[c], 1'b1);
      check($sformatf("LLRF slow permit cav%0d", c), llrf_slow_pmt[c], 1'b1);
    end

    for (int k = 0; k < 10; k++) begin
      for (int c = 0; c < NC; c++) begin
        int o;
        o = 1 - c;
        @(negedge clk) set_ilk(k, c, 1'b1);
        n = 0;
        while (rf_drive_pmt[c] !== 1'b0 && n < 2 * SCAN) begin
          @(posedge clk); n++; #1;
        end
        checks++;
        if (n > MAX_LAT || n > REQ_CYC) begin
          failures++;
          $display("FAIL ilk %0d cav%0d: response %0d cycles", k, c, n);
        end
        check($sformatf("ilk %0d cav%0d HPA permit dropped", k, c), hpa_pmt[c], 1'b0);
        check($sformatf("ilk %0d cav%0d LLRF permit dropped", k, c), llrf_slow_pmt[c], 1'b0);
        check($sformatf("ilk %0d cav%0d transmit off", k, c), transmit_on[c], 1'b0);
        checks++;
        if (ilk_latched[c] != ilk_word(k)) begin
          failures++;
          $display("FAIL ilk %0d cav%0d status %b expected %b", k, c, ilk_latched[c], ilk_word(k));
        end
        check($sformatf("ilk %0d other cavity", k), rf_drive_pmt[o], shared(k) ? 1'b0 : 1'b1);

        // reset while the cause persists: stays
        pulse(reset_cmd, c);
        scans(1);
        check($sformatf("ilk %0d reset ignored while bad", k), hpa_pmt[c], 1'b0);
        // cause gone: still latched
        @(negedge clk) set_ilk(k, c, 1'b0);
        scans(2);
        check($sformatf("ilk %0d latched", k), hpa_pmt[c], 1'b0);
        // TX ON refused while latched
        pulse(tx_on_cmd, c);
        scans(1);
        check($sformatf("ilk %0d TX ON refused", k), transmit_on[c], 1'b0);
        // reset clears, transmit stays off
        pulse(reset_cmd, c);
        if (shared(k)) pulse(reset_cmd, o);
        scans(1);
        check($sformatf("ilk %0d cleared", k), hpa_pmt[c], 1'b1);
        check($sformatf("ilk %0d no drive until TX ON", k), rf_drive_pmt[c], 1'b0);
        pulse(tx_on_cmd, 0);
        pulse(tx_on_cmd, 1);
        scans(1);
        check($sformatf("ilk %0d transmit again", k), rf_drive_pmt[c], 1'b1);
      end
    end

    // TX OFF: drive permit goes, HPA permit stays
    pulse(tx_off_cmd, 0);
    scans(1);
    check("TX OFF drops drive", rf_drive_pmt[0], 1'b0);
    check("TX OFF keeps HPA permit", hpa_pmt[0], 1'b1);
    check("TX OFF other cavity", rf_drive_pmt[1], 1'b1);
    pulse(tx_on_cmd, 0);
    scans(1);

    // MPS bypass in an RF test mode
    @(negedge clk) rf_test_mode = 1'b1;
    scans(1);
    @(negedge clk) mps_permit_a = 1'b0;
    scans(2);
    check("MPS bypassed in test mode", rf_drive_pmt[0], 1'b1);
    checks++;
    if (ilk_latched[0].mps) begin failures++; $display("FAIL MPS latched in test mode"); end
    @(negedge clk) rf_test_mode = 1'b0;
    scans(2);
    check("MPS trips in operational mode", rf_drive_pmt[0], 1'b0);
    check("MPS status bit", ilk_latched[0].mps, 1'b1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

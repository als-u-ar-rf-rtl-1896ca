// master_interlock - slow (millisecond-scale) interlock logic of the master
// interlock controller, for N_CAV cavities.
//
// In the real system this function runs as PLC code; this module gives the
// same decisions as clocked logic.  What follows the system description:
// the controller collects the MPS permits (redundant pair A/B), the PPS
// status, the cavity vacuum status, the cavity ancillaries (feeder, RF
// switch, cavity temperatures/flows, tuner), the HPA fault status and the
// LLRF permit, and sends permits back to the LLRF controller, the HPA and
// the RF Drive Control Chassis of each cavity; it coordinates RF start-up
// and shut-down.  The interlock and command names (PPS, MPS, Feeder, RF
// Switch, Cavity, Tuner, HPA Fault, TX ON, TX OFF, RESET, LLRF Slow Pmt,
// HPA Pmt, RF Drive Pmt, Transmit On) are those of the operator display.
//
// Own choices (the description gives no PLC program):
//   * Scan: like a PLC task, inputs are read and outputs written once per
//     scan of SCAN_US microseconds (1 ms by default).  Inputs first pass a
//     two-flop synchronizer; command pulses (tx_on, tx_off, reset) are held
//     until the next scan so a short pulse is never lost.
//   * Latching: each interlock of mi_ilk_t latches when it trips and clears
//     only on a reset command once its cause has gone.
//   * Transmit: TX ON sets transmit_on when no interlock is latched; TX OFF
//     or any interlock clears it.
//   * Permits: hpa_pmt = no latched interlock; rf_drive_pmt = llrf_slow_pmt
//     = no latched interlock and transmit_on.
//   * MPS bypass: the MPS interlock is masked in the RF test modes, the same
//     bypass the drive-chassis hardware logic applies; otherwise the
//     hardware bypass could never take effect.
//   * An invalid key-switch reading is an interlock of its own (mode).
// Timing: an input change reaches the permits within SCAN_CYCLES + 2 clock
// cycles (1 ms + 20 ns at the defaults), inside the 10 ms master-interlock
// response requirement.
module master_interlock
  import eps_pkg::*;
#(
  parameter int unsigned N_CAV_P = eps_pkg::N_CAV,
  parameter int unsigned CLK_HZ  = eps_pkg::CLK_HZ_DEFAULT,
  parameter int unsigned SCAN_US = 1000
) (
  input  logic               clk,
  input  logic               rst_n,
  // external subsystems (shared by both cavities)
  input  logic               mps_permit_a,
  input  logic               mps_permit_b,
  input  logic               pps_permit,
  input  logic               rf_test_mode,
  input  logic               mode_valid,
  // per cavity status inputs, 1 = OK unless named as a fault
  input  logic [N_CAV_P-1:0] llrf_permit,
  input  logic [N_CAV_P-1:0] hpa_fault,
  input  logic [N_CAV_P-1:0] vacuum_ok,
  input  logic [N_CAV_P-1:0] feeder_ok,
  input  logic [N_CAV_P-1:0] rf_switch_ok,
  input  logic [N_CAV_P-1:0] cavity_ok,
  input  logic [N_CAV_P-1:0] tuner_ok,
  // per cavity operator commands (pulses)
  input  logic [N_CAV_P-1:0] tx_on_cmd,
  input  logic [N_CAV_P-1:0] tx_off_cmd,
  input  logic [N_CAV_P-1:0] reset_cmd,
  // per cavity permits and status
  output logic [N_CAV_P-1:0] llrf_slow_pmt,
  output logic [N_CAV_P-1:0] hpa_pmt,
  output logic [N_CAV_P-1:0] rf_drive_pmt,
  output logic [N_CAV_P-1:0] transmit_on,
  output mi_ilk_t            ilk_latched [N_CAV_P],
  output logic               scan_tick
);

  localparam longint unsigned SCAN_CYCLES =
    ns_to_cycles(64'(SCAN_US) * 64'd1000, 64'(CLK_HZ));
  localparam int unsigned SW = $clog2(SCAN_CYCLES + 1);

  // ---- scan timer -------------------------------------------------------
  logic [SW-1:0] scan_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scan_cnt <= '0;
    end else if (scan_cnt == SW'(SCAN_CYCLES - 1)) begin
      scan_cnt <= '0;
    end else begin
      scan_cnt <= scan_cnt + 1'b1;
    end
  end

  assign scan_tick = (scan_cnt == SW'(SCAN_CYCLES - 1));

  // ---- input synchronizers ---------------------------------------------
  localparam int unsigned NG = 5;            // shared inputs
  localparam int unsigned NC = 7 * N_CAV_P;  // per-cavity inputs
  logic [NG+NC-1:0] in_raw, in_m, in_s;

  assign in_raw = {mps_permit_a, mps_permit_b, pps_permit, rf_test_mode,
                   mode_valid, llrf_permit, hpa_fault, vacuum_ok, feeder_ok,
                   rf_switch_ok, cavity_ok, tuner_ok};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_m <= '0;
      in_s <= '0;
    end else begin
      in_m <= in_raw;
      in_s <= in_m;
    end
  end

  logic               s_mps_a, s_mps_b, s_pps, s_test, s_mode_ok;
  logic [N_CAV_P-1:0] s_llrf, s_hpa_f, s_vac, s_feed, s_rfsw, s_cav, s_tun;

  assign {s_mps_a, s_mps_b, s_pps, s_test, s_mode_ok, s_llrf, s_hpa_f, s_vac,
          s_feed, s_rfsw, s_cav, s_tun} = in_s;

  // ---- command capture --------------------------------------------------
  logic [N_CAV_P-1:0] on_pend, off_pend, rst_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      on_pend  <= '0;
      off_pend <= '0;
      rst_pend <= '0;
    end else if (scan_tick) begin
      on_pend  <= tx_on_cmd;
      off_pend <= tx_off_cmd;
      rst_pend <= reset_cmd;
    end else begin
      on_pend  <= on_pend  | tx_on_cmd;
      off_pend <= off_pend | tx_off_cmd;
      rst_pend <= rst_pend | reset_cmd;
    end
  end

  // ---- interlock evaluation (one scan) ---------------------------------
  mi_ilk_t            trip_now  [N_CAV_P];
  mi_ilk_t            latch_nxt [N_CAV_P];
  logic [N_CAV_P-1:0] tx_nxt;

  always_comb begin
    for (int c = 0; c < N_CAV_P; c++) begin
      trip_now[c].pps       = ~s_pps;
      trip_now[c].mps       = ~(s_mps_a & s_mps_b) & ~s_test;
      trip_now[c].mode      = ~s_mode_ok;
      trip_now[c].vacuum    = ~s_vac[c];
      trip_now[c].feeder    = ~s_feed[c];
      trip_now[c].rf_switch = ~s_rfsw[c];
      trip_now[c].cavity    = ~s_cav[c];
      trip_now[c].tuner     = ~s_tun[c];
      trip_now[c].hpa       = s_hpa_f[c];
      trip_now[c].llrf      = ~s_llrf[c];

      latch_nxt[c] = rst_pend[c] ? trip_now[c] : (ilk_latched[c] | trip_now[c]);

      if (off_pend[c] || (latch_nxt[c] != '0)) tx_nxt[c] = 1'b0;
      else if (on_pend[c])                    tx_nxt[c] = 1'b1;
      else                                    tx_nxt[c] = transmit_on[c];
    end
  end

  // ---- output image, written once per scan -----------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CAV_P; c++) ilk_latched[c] <= '0;
      transmit_on   <= '0;
      hpa_pmt       <= '0;
      rf_drive_pmt  <= '0;
      llrf_slow_pmt <= '0;
    end else if (scan_tick) begin
      for (int c = 0; c < N_CAV_P; c++) begin
        ilk_latched[c]   <= latch_nxt[c];
        hpa_pmt[c]       <= (latch_nxt[c] == '0);
        rf_drive_pmt[c]  <= (latch_nxt[c] == '0) & tx_nxt[c];
        llrf_slow_pmt[c] <= (latch_nxt[c] == '0) & tx_nxt[c];
      end
      transmit_on <= tx_nxt;
    end
  end

  // Drive permits must never stand while transmit is off.
  a_drive_needs_tx: assert property (@(posedge clk)
    (rf_drive_pmt & ~transmit_on) == '0);

endmodule

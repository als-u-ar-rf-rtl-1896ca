// ar_rf_eps - equipment protection system of a two-cavity accumulator-ring
// RF plant.
//
// Each cavity is fed by the chain LLRF controller -> RF Drive Control
// Chassis -> PPS Interlock Interface Chassis -> high-power amplifier (HPA).
// The protection system cuts the RF drive in that chain on any anomaly, in
// two ways that follow the system description:
//   * primary: the RF Drive Control Chassis opens its PIN diode (800 ns)
//     and its coaxial switch (20 ms) when its hardware permit logic
//     (rf_drive_control) loses the LLRF permit, the master-interlock permit
//     or the MPS permit pair - the last bypassed in the RF test modes;
//   * secondary: permits exchanged between the master interlock
//     (master_interlock), the LLRF controllers (llrf_interlock) and the
//     HPAs - the HPA permit and the LLRF Oscillation Permit leave this
//     design as ports, since the HPA's own protection is not part of it.
// The PPS key switch (pps_mode_select) supplies the operating mode; the two
// PPS-controlled coaxial switches per cavity (chain A, chain B) sit in
// series in the drive path.
//
// The PIN diode and coaxial switches are behavioural models (clocked,
// switching-time counters); everything else is synthesizable.  RF is
// represented by one "RF present" bit per point of the chain.
//
// Interface: all signals synchronous to clk except the permits and
// contacts from other chassis, which are synchronized where they enter
// clocked logic.  Permits are active high.  Per-cavity signals are indexed
// by cavity number.  Thresholds and limits are inputs (configuration that
// the real LLRF controller receives over RS-485).
// Timing at the defaults (100 MHz clock, own choice): MPS permit loss ->
// RF drive gone in 800 ns (PIN diode); LLRF power fault -> 820 ns; arc ->
// 830 ns; slow interlock -> at most one 1 ms scan plus 820 ns.
module ar_rf_eps
  import eps_pkg::*;
#(
  parameter int unsigned N_CAV_P   = eps_pkg::N_CAV,
  parameter int unsigned CLK_HZ    = eps_pkg::CLK_HZ_DEFAULT,
  parameter int unsigned N_PWR     = 8,
  parameter int unsigned PWR_W     = 16,
  parameter int unsigned SCAN_US   = 1000,
  parameter int unsigned PIN_NS    = eps_pkg::PIN_SWITCH_NS,
  parameter int unsigned COAX_NS   = eps_pkg::COAX_SWITCH_NS
) (
  input  logic               clk,
  input  logic               rst_n,
  // MPS: redundant permit pair, to master interlock and drive chassis
  input  logic               mps_permit_a,
  input  logic               mps_permit_b,
  // PPS: status, key switch and the chain A / B coaxial-switch controls
  input  logic               pps_permit,
  input  logic [3:0]         key_sw,
  input  logic [N_CAV_P-1:0] pps_chain_a_close,
  input  logic [N_CAV_P-1:0] pps_chain_b_close,
  // LLRF controller inputs, per cavity
  input  logic [N_ARC-1:0]   arc_detect   [N_CAV_P],
  input  logic [PWR_W-1:0]   rf_power     [N_CAV_P][N_PWR],
  input  logic [PWR_W-1:0]   power_limit  [N_CAV_P][N_PWR],
  input  logic [PWR_W-1:0]   cav_power    [N_CAV_P],
  input  logic [PWR_W-1:0]   drive_power  [N_CAV_P],
  input  logic [PWR_W-1:0]   osc_limit    [N_CAV_P],
  input  logic [N_CAV_P-1:0] llrf_drive_on,
  // slow-interlock status inputs, per cavity
  input  logic [N_CAV_P-1:0] hpa_fault,
  input  logic [N_CAV_P-1:0] vacuum_ok,
  input  logic [N_CAV_P-1:0] feeder_ok,
  input  logic [N_CAV_P-1:0] rf_switch_ok,
  input  logic [N_CAV_P-1:0] cavity_ok,
  input  logic [N_CAV_P-1:0] tuner_ok,
  // operator commands, per cavity (pulses)
  input  logic [N_CAV_P-1:0] tx_on_cmd,
  input  logic [N_CAV_P-1:0] tx_off_cmd,
  input  logic [N_CAV_P-1:0] reset_cmd,
  // to the HPAs
  output logic [N_CAV_P-1:0] rf_drive_to_hpa,
  output logic [N_CAV_P-1:0] hpa_pmt,
  output logic [N_CAV_P-1:0] osc_permit,
  // status
  output rf_mode_e           rf_mode,
  output logic               rf_test_mode,
  output logic               mode_valid,
  output logic [N_CAV_P-1:0] llrf_permit,
  output logic [N_CAV_P-1:0] mi_drive_pmt,
  output logic [N_CAV_P-1:0] transmit_on,
  output logic [N_CAV_P-1:0] rf_drive_permit,
  output logic [N_CAV_P-1:0] mps_bypassed,
  output logic [N_CAV_P-1:0] pin_closed,
  output logic [N_CAV_P-1:0] coax_closed,
  output logic [N_CAV_P-1:0] chain_a_closed,
  output logic [N_CAV_P-1:0] chain_b_closed,
  output logic               scan_tick,
  output mi_ilk_t            ilk_latched  [N_CAV_P],
  output logic [N_ARC-1:0]   arc_fault    [N_CAV_P],
  output logic [N_PWR-1:0]   power_fault  [N_CAV_P],
  output logic [N_CAV_P-1:0] osc_fault
);

  logic [N_CAV_P-1:0] llrf_slow_pmt;
  logic [N_CAV_P-1:0] llrf_rf, pin_rf, coax_rf, chain_a_rf;

  pps_mode_select u_pps_mode (
    .key_sw       (key_sw),
    .mode         (rf_mode),
    .mode_valid   (mode_valid),
    .rf_test_mode (rf_test_mode)
  );

  master_interlock #(
    .N_CAV_P (N_CAV_P),
    .CLK_HZ  (CLK_HZ),
    .SCAN_US (SCAN_US)
  ) u_master (
    .clk           (clk),
    .rst_n         (rst_n),
    .mps_permit_a  (mps_permit_a),
    .mps_permit_b  (mps_permit_b),
    .pps_permit    (pps_permit),
    .rf_test_mode  (rf_test_mode),
    .mode_valid    (mode_valid),
    .llrf_permit   (llrf_permit),
    .hpa_fault     (hpa_fault),
    .vacuum_ok     (vacuum_ok),
    .feeder_ok     (feeder_ok),
    .rf_switch_ok  (rf_switch_ok),
    .cavity_ok     (cavity_ok),
    .tuner_ok      (tuner_ok),
    .tx_on_cmd     (tx_on_cmd),
    .tx_off_cmd    (tx_off_cmd),
    .reset_cmd     (reset_cmd),
    .llrf_slow_pmt (llrf_slow_pmt),
    .hpa_pmt       (hpa_pmt),
    .rf_drive_pmt  (mi_drive_pmt),
    .transmit_on   (transmit_on),
    .ilk_latched   (ilk_latched),
    .scan_tick     (scan_tick)
  );

  for (genvar c = 0; c < N_CAV_P; c++) begin : g_cav

    // LLRF controller, digital chassis protection function
    llrf_interlock #(
      .N_PWR (N_PWR),
      .PWR_W (PWR_W)
    ) u_llrf (
      .clk           (clk),
      .rst_n         (rst_n),
      .arc_detect    (arc_detect[c]),
      .rf_power      (rf_power[c]),
      .power_limit   (power_limit[c]),
      .cav_power     (cav_power[c]),
      .drive_power   (drive_power[c]),
      .osc_limit     (osc_limit[c]),
      .mi_plc_permit (llrf_slow_pmt[c]),
      .ilk_reset     (reset_cmd[c]),
      .drive_on      (llrf_drive_on[c]),
      .llrf_permit   (llrf_permit[c]),
      .osc_permit    (osc_permit[c]),
      .rf_drive_out  (llrf_rf[c]),
      .arc_fault     (arc_fault[c]),
      .power_fault   (power_fault[c]),
      .osc_fault     (osc_fault[c])
    );

    // RF Drive Control Chassis: hardware logic, PIN diode, coaxial switch
    rf_drive_control u_drive_logic (
      .mps_permit_a    (mps_permit_a),
      .mps_permit_b    (mps_permit_b),
      .rf_test_mode    (rf_test_mode),
      .llrf_permit     (llrf_permit[c]),
      .mi_plc_permit   (mi_drive_pmt[c]),
      .rf_drive_permit (rf_drive_permit[c]),
      .mps_bypassed    (mps_bypassed[c])
    );

    pin_diode_model #(
      .CLK_HZ    (CLK_HZ),
      .SWITCH_NS (PIN_NS)
    ) u_pin (
      .clk        (clk),
      .rst_n      (rst_n),
      .ctrl_close (rf_drive_permit[c]),
      .rf_in      (llrf_rf[c]),
      .rf_out     (pin_rf[c]),
      .closed     (pin_closed[c])
    );

    coax_switch_model #(
      .CLK_HZ    (CLK_HZ),
      .SWITCH_NS (COAX_NS)
    ) u_coax (
      .clk        (clk),
      .rst_n      (rst_n),
      .ctrl_close (rf_drive_permit[c]),
      .rf_in      (pin_rf[c]),
      .rf_out     (coax_rf[c]),
      .closed     (coax_closed[c])
    );

    // PPS Interlock Interface Chassis: chain A and chain B in series
    coax_switch_model #(
      .CLK_HZ    (CLK_HZ),
      .SWITCH_NS (COAX_NS)
    ) u_pps_chain_a (
      .clk        (clk),
      .rst_n      (rst_n),
      .ctrl_close (pps_chain_a_close[c]),
      .rf_in      (coax_rf[c]),
      .rf_out     (chain_a_rf[c]),
      .closed     (chain_a_closed[c])
    );

    coax_switch_model #(
      .CLK_HZ    (CLK_HZ),
      .SWITCH_NS (COAX_NS)
    ) u_pps_chain_b (
      .clk        (clk),
      .rst_n      (rst_n),
      .ctrl_close (pps_chain_b_close[c]),
      .rf_in      (chain_a_rf[c]),
      .rf_out     (rf_drive_to_hpa[c]),
      .closed     (chain_b_closed[c])
    );

  end

endmodule

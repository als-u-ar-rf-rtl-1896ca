// rf_drive_control - permit logic of the RF Drive Control Chassis.
//
// The RF Drive Control Chassis is the primary RF mitigation device: it sits
// in the RF drive path between the LLRF controller and the high-power
// amplifier and holds a PIN diode and a coaxial switch in series.  Both are
// closed only while this logic grants the RF drive permit:
//
//   rf_drive_permit = llrf_permit & mi_plc_permit &
//                     (rf_test_mode | (mps_permit_a & mps_permit_b))
//
// The two redundant MPS permits are ANDed; during the RF test modes selected
// on the PPS key switch the MPS pair is bypassed, which lets the RF be
// commissioned while the rest of the accelerator is not ready.  The gate
// structure (AND, OR, AND) and the signal names follow the published
// hardware logic diagram exactly.
//
// Interface: five single-bit permits in, the drive permit out, plus a
// status bit mps_bypassed (own addition) telling that the permit currently
// stands only because of the test-mode bypass.
// Timing: purely combinational, as in the original hardware logic; there is
// no clock and no storage.  Permits are active high (own choice, fail-safe).
module rf_drive_control (
  input  logic mps_permit_a,
  input  logic mps_permit_b,
  input  logic rf_test_mode,
  input  logic llrf_permit,
  input  logic mi_plc_permit,
  output logic rf_drive_permit,
  output logic mps_bypassed
);

  logic mps_ok;        // output of the first AND gate
  logic mps_or_test;   // output of the OR gate

  always_comb begin
    mps_ok          = mps_permit_a & mps_permit_b;
    mps_or_test     = rf_test_mode | mps_ok;
    rf_drive_permit = llrf_permit & mi_plc_permit & mps_or_test;
    mps_bypassed    = rf_drive_permit & ~mps_ok;
  end

endmodule

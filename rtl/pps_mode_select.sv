// pps_mode_select - RF operating-mode decoder of the PPS Interlock
// Interface Chassis.
//
// Operators choose one of four RF operating modes with a safety-system key
// switch: Operational, RF Test, RF Test with Access, and RF Test to Dummy
// Load.  The three test modes allow the MPS permits to be bypassed in the
// RF drive control logic.  This block turns the key switch's position
// contacts into the mode, a validity flag and the RF Test Mode signal.
//
// key_sw has one contact per position, bit i closed (1) in position i, in
// the order the modes are listed above (own choice of wiring).  Exactly one
// closed contact is a valid reading.  No contact (key between positions) or
// several contacts is invalid: mode_valid drops, the mode reads
// Operational and rf_test_mode stays 0, so an unclear switch can never
// bypass the MPS (own choice, fail-safe).
// Timing: combinational, like the drive-control hardware logic it feeds.
module pps_mode_select
  import eps_pkg::*;
(
  input  logic [3:0] key_sw,
  output rf_mode_e   mode,
  output logic       mode_valid,
  output logic       rf_test_mode
);

  always_comb begin
    mode       = MODE_OPERATIONAL;
    mode_valid = 1'b1;
    unique case (key_sw)
      4'b0001: mode = MODE_OPERATIONAL;
      4'b0010: mode = MODE_RF_TEST;
      4'b0100: mode = MODE_RF_TEST_ACCESS;
      4'b1000: mode = MODE_RF_TEST_DUMMY_LOAD;
      default: mode_valid = 1'b0;
    endcase
    rf_test_mode = mode_valid && (mode != MODE_OPERATIONAL);
  end

endmodule

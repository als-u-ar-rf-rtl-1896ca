// tb_rf_drive_control - exhaustive self-checking test of the RF Drive
// Control Chassis permit logic.
//
// All 32 combinations of the five permits are applied.  The expected drive
// permit is worked out from the truth table of the published gate diagram
// written as a case list (permit only when LLRF and master-interlock
// permits are present and either the test mode is on or both MPS permits
// are present), independently of the gate expression in the design.
`timescale 1ns/1ps
module tb_rf_drive_control;

  logic mps_a, mps_b, test, llrf, mip;
  logic permit, bypassed;
  int   checks = 0, failures = 0;

  rf_drive_control dut (
    .mps_permit_a    (mps_a),
    .mps_permit_b    (mps_b),
    .rf_test_mode    (test),
    .llrf_permit     (llrf),
    .mi_plc_permit   (mip),
    .rf_drive_permit (permit),
    .mps_bypassed    (bypassed)
  );

  initial begin : watchdog
    #100us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp_permit, exp_bypass;
    int   n_permit;
    n_permit = 0;
    for (int v = 0; v < 32; v++) begin
      {mps_a, mps_b, test, llrf, mip} = 5'(v);
      #10;
      // truth table: only these input words may grant RF
      //   {mps_a,mps_b,test,llrf,mip} = 11011, 11111, 00111, 01111, 10111
      case (5'(v))
        5'b11011, 5'b11111: begin exp_permit = 1'b1; exp_bypass = 1'b0; end
        5'b00111, 5'b01111, 5'b10111: begin exp_permit = 1'b1; exp_bypass = 1'b1; end
        default: begin exp_permit = 1'b0; exp_bypass = 1'b0; end
      endcase
      checks++;
      if (permit !== exp_permit) begin
        failures++;
        $display("FAIL permit: inputs=%05b got %0b expected %0b", 5'(v), permit, exp_permit);
      end
      checks++;
      if (bypassed !== exp_bypass) begin
        failures++;
        $display("FAIL bypass: inputs=%05b got %0b expected %0b", 5'(v), bypassed, exp_bypass);
      end
      if (permit) n_permit++;
    end
    checks++;
    if (n_permit != 5) begin
      failures++;
      $display("FAIL: %0d permitting input words, expected 5", n_permit);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

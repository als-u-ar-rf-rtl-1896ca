// tb_pps_mode_select - exhaustive self-checking test of the RF mode key
// switch decoder.
//
// All 16 contact patterns are applied.  Exactly one closed contact must
// give that position's mode with mode_valid = 1; rf_test_mode must be set
// for the three test positions only.  Every other pattern must read
// invalid, Operational, and never request the MPS bypass.
`timescale 1ns/1ps
module tb_pps_mode_select;
  import eps_pkg::*;

  logic [3:0] key_sw;
  rf_mode_e   mode;
  logic       mode_valid, rf_test_mode;
  int         checks = 0, failures = 0;

  pps_mode_select dut (.*);

  initial begin : watchdog
    #100us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_out(rf_mode_e m, logic v, logic t);
    checks++;
    if (mode !== m || mode_valid !== v || rf_test_mode !== t) begin
      failures++;
      $display("FAIL key_sw=%04b: mode=%0d valid=%0b test=%0b, expected %0d %0b %0b",
               key_sw, mode, mode_valid, rf_test_mode, m, v, t);
    end
  endtask

  initial begin
    for (int v = 0; v < 16; v++) begin
      key_sw = 4'(v);
      #10;
      case (v)
        1:       expect_out(MODE_OPERATIONAL,        1'b1, 1'b0);
        2:       expect_out(MODE_RF_TEST,            1'b1, 1'b1);
        4:       expect_out(MODE_RF_TEST_ACCESS,     1'b1, 1'b1);
        8:       expect_out(MODE_RF_TEST_DUMMY_LOAD, 1'b1, 1'b1);
        default: expect_out(MODE_OPERATIONAL,        1'b0, 1'b0);
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

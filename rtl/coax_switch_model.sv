// coax_switch_model - BEHAVIOURAL MODEL, not synthesizable hardware of this design.
//
// Behavioural model of an electromechanical RF coaxial switch.  One sits in
// series with the PIN diode in each RF Drive Control Chassis; two more per
// cavity (chain A and chain B) sit in the PPS Interlock Interface Chassis.
// The published switching time of the drive-chassis switch is 20 ms; the
// same time is used for the PPS chain switches, whose time is not given.
//
// The real part is analog / electromechanical.  The model keeps only what
// matters to the protection logic: RF is a one-bit "RF present" level, and
// the switch state follows the control input once the control has stood at
// the new value for SWITCH_NS, rounded up to whole cycles of clk.  A control
// pulse shorter than the switching time does not move the switch (the
// count restarts whenever control and state agree again).
//
// Ports: ctrl_close (1 = close, pass RF), rf_in, rf_out = rf_in & closed,
// closed (switch state).  Reset leaves the switch open (own choice).
// Timing: closed changes SWITCH_CYCLES rising edges after the first edge
// that samples the changed control.
module coax_switch_model #(
  parameter int unsigned CLK_HZ    = eps_pkg::CLK_HZ_DEFAULT,
  parameter int unsigned SWITCH_NS = eps_pkg::COAX_SWITCH_NS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic ctrl_close,
  input  logic rf_in,
  output logic rf_out,
  output logic closed
);

  localparam longint unsigned SWITCH_CYCLES =
    eps_pkg::ns_to_cycles(64'(SWITCH_NS), 64'(CLK_HZ));
  localparam int unsigned CW = $clog2(SWITCH_CYCLES + 1);

  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      closed <= 1'b0;
      cnt    <= '0;
    end else if (ctrl_close == closed) begin
      cnt <= '0;
    end else if (cnt == CW'(SWITCH_CYCLES - 1)) begin
      closed <= ctrl_close;
      cnt    <= '0;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

  assign rf_out = rf_in & closed;

endmodule

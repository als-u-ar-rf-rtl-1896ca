// llrf_interlock - fast (microsecond-scale) equipment-protection function of
// one LLRF controller's digital chassis.
//
// What it does (from the system description): the digital chassis removes
// its permit, which goes to the RF Drive Control Chassis and to the master
// interlock, when any of its arc detectors (circulator, circulator load,
// future spare) sees an arc or when a measured RF power exceeds its preset
// threshold.  It removes the Oscillation Permit to the high-power amplifier
// when the measured cavity power and the drive signal disagree.  It also
// receives a permit from the master interlock.
//
// How it works (own implementation, the simplest that does the above):
//   stage 0  the asynchronous arc-detector contacts and the master-interlock
//            permit pass a two-flop synchronizer;
//   stage 1  each RF power reading is compared with its threshold, and
//            |cavity power - drive power| with the discrepancy limit, in one
//            registered step;
//   stage 2  every fault is latched; a latched fault clears only on
//            ilk_reset and only once its condition has gone.
//   llrf_permit = no arc fault and no power fault; osc_permit = no
//   discrepancy fault.  The master-interlock permit does NOT enter
//   llrf_permit (the master interlock itself watches llrf_permit, so the
//   loop would never start); it gates the LLRF's own RF drive output
//   rf_drive_out = drive_on & mi_plc_permit (own choice).  The LLRF's own
//   faults cut the drive through its permit to the RF Drive Control
//   Chassis, the system's primary mitigation path.
//
// Interface: readings are unsigned PWR_W-bit numbers in one common scale,
// already sampled in the clk domain; thresholds arrive as inputs because
// the real controller receives its configuration over its RS-485 link.
// Timing: a power or discrepancy fault drops its permit 2 clock edges after
// the reading is presented, an arc 3 edges after the contact closes - 20 ns
// and 30 ns at 100 MHz, far inside the 6 us LLRF response requirement.  The
// master-interlock permit reaches rf_drive_out 2 edges after it changes.
// After rst_n all faults are clear and are re-evaluated at once.
module llrf_interlock
  import eps_pkg::*;
#(
  parameter int unsigned N_PWR = 8,   // number of RF power signals watched
  parameter int unsigned PWR_W = 16   // width of one power reading
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [N_ARC-1:0]      arc_detect,     // 1 = arc seen
  input  logic [PWR_W-1:0]      rf_power    [N_PWR],
  input  logic [PWR_W-1:0]      power_limit [N_PWR],
  input  logic [PWR_W-1:0]      cav_power,      // measured cavity power
  input  logic [PWR_W-1:0]      drive_power,    // drive signal, same scale
  input  logic [PWR_W-1:0]      osc_limit,      // allowed discrepancy
  input  logic                  mi_plc_permit,  // from master interlock
  input  logic                  ilk_reset,      // clear latched faults
  input  logic                  drive_on,       // LLRF loop wants RF on
  output logic                  llrf_permit,
  output logic                  osc_permit,
  output logic                  rf_drive_out,   // RF present at LLRF output
  output logic [N_ARC-1:0]      arc_fault,      // latched, for status
  output logic [N_PWR-1:0]      power_fault,    // latched, for status
  output logic                  osc_fault       // latched, for status
);

  // stage 0: synchronizers for the asynchronous single-bit inputs
  logic [N_ARC-1:0] arc_m, arc_s;
  logic             mip_m, mip_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arc_m <= '0;
      arc_s <= '0;
      mip_m <= 1'b0;
      mip_s <= 1'b0;
    end else begin
      arc_m <= arc_detect;
      arc_s <= arc_m;
      mip_m <= mi_plc_permit;
      mip_s <= mip_m;
    end
  end

  // stage 1: threshold and discrepancy comparisons
  logic [N_PWR-1:0] over_q;
  logic             disc_q;
  logic [PWR_W-1:0] diff;

  always_comb begin
    diff = (cav_power > drive_power) ? (cav_power - drive_power)
                                     : (drive_power - cav_power);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      over_q <= '0;
      disc_q <= 1'b0;
    end else begin
      for (int i = 0; i < N_PWR; i++) over_q[i] <= rf_power[i] > power_limit[i];
      disc_q <= diff > osc_limit;
    end
  end

  // stage 2: fault latches, cleared by ilk_reset once the cause has gone
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arc_fault   <= '0;
      power_fault <= '0;
      osc_fault   <= 1'b0;
    end else begin
      arc_fault   <= (arc_fault   & ~{N_ARC{ilk_reset}}) | arc_s;
      power_fault <= (power_fault & ~{N_PWR{ilk_reset}}) | over_q;
      osc_fault   <= (osc_fault   & ~ilk_reset)          | disc_q;
    end
  end

  assign llrf_permit  = ~(|arc_fault) & ~(|power_fault);
  assign osc_permit   = ~osc_fault;
  assign rf_drive_out = drive_on & mip_s;

  // A latched fault must always withdraw the permit.
  a_fault_blocks_permit: assert property (@(posedge clk)
    (|{arc_fault, power_fault}) |-> !llrf_permit);

endmodule

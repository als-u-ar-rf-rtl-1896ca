// eps_pkg - types and constants shared by the AR RF equipment protection
// logic.
//
// Conventions used by every module:
//   * A permit is active high: 1 = permit, 0 = inhibit.  A cable that is cut
//     or a chassis that loses power therefore inhibits RF (fail-safe).
//   * A fault flag is active high: 1 = fault present or latched.
//   * One system clock, CLK_HZ, drives all clocked logic and the clocked
//     behavioural models of the RF switches.
//
// The number of cavities (two), the three arc detectors of each LLRF
// controller, the four key-switch operating modes and the response-time
// requirements come from the published system description.  The clock
// frequency, the data widths and the status-word layout are this design's
// own choices.
package eps_pkg;

  // Two 500 MHz normal-conducting cavities, each with its own RF chain.
  localparam int unsigned N_CAV = 2;

  // Arc detectors wired to each LLRF digital chassis.
  localparam int unsigned N_ARC   = 3;
  localparam int unsigned ARC_CIRC      = 0;  // circulator
  localparam int unsigned ARC_CIRC_LOAD = 1;  // circulator load
  localparam int unsigned ARC_SPARE     = 2;  // future spare

  // System clock (own choice).
  localparam int unsigned CLK_HZ_DEFAULT = 100_000_000;

  // Response-time requirements for RF shut-off, in nanoseconds.
  localparam longint unsigned LLRF_RESPONSE_NS = 64'd6_000;        // 6 us
  localparam longint unsigned MI_RESPONSE_NS   = 64'd10_000_000;   // 10 ms
  localparam longint unsigned MPS_RESPONSE_NS  = 64'd20_000_000;   // 20 ms

  // Switching times of the mitigation devices, in nanoseconds.
  localparam int unsigned PIN_SWITCH_NS  = 800;          // PIN diode
  localparam int unsigned COAX_SWITCH_NS = 20_000_000;   // coaxial switch

  // RF operating modes selected by the PPS key switch.  The encoding is the
  // key-switch position index; the order is the order the modes are listed
  // in the system description.
  typedef enum logic [1:0] {
    MODE_OPERATIONAL        = 2'd0,
    MODE_RF_TEST            = 2'd1,
    MODE_RF_TEST_ACCESS     = 2'd2,
    MODE_RF_TEST_DUMMY_LOAD = 2'd3
  } rf_mode_e;

  // Slow interlocks evaluated per cavity by the master interlock logic.
  // Each bit is 1 when that interlock is tripped (latched until reset).
  typedef struct packed {
    logic pps;        // PPS does not permit RF
    logic mps;        // MPS permit A or B lost and no test-mode bypass
    logic mode;       // key switch reads no valid single position
    logic vacuum;     // cavity vacuum gauge controller not OK
    logic feeder;     // feeder (transmission line) interlock
    logic rf_switch;  // high-power RF switch interlock
    logic cavity;     // cavity temperature / flow interlock
    logic tuner;      // tuner interlock
    logic hpa;        // HPA reports a fault
    logic llrf;       // LLRF digital chassis fast permit lost
  } mi_ilk_t;

  localparam int unsigned MI_ILK_W = $bits(mi_ilk_t);

  // Number of clock cycles needed to cover a time given in nanoseconds,
  // rounded up, never less than one.
  function automatic longint unsigned ns_to_cycles(longint unsigned ns,
                                                   longint unsigned clk_hz);
    longint unsigned c;
    c = (ns * clk_hz + 64'd999_999_999) / 64'd1_000_000_000;
    return (c == 0) ? 64'd1 : c;
  endfunction

endpackage

// spwm_pkg: constants, types and elaboration-time functions shared by the
// solar inverter controller.
//
// Pulse timing (direct PWM). A half cycle of the output (180 degrees) is cut
// into N equal sectors of 180/N degrees. Pulse i (i = 1..N) is centred in
// sector i and is K*(180/N)*sin((2i-1)*pi/(2N)) degrees wide, so its rising
// edge is at (2i-1)*180/(2N) - K*(180/(2N))*sin((2i-1)*pi/(2N)) degrees and
// its falling edge at the same centre plus that half width. The width formula
// is the paper's; centring each pulse in its sector is read from its pulse
// timing table and waveform plot for N = 3 (edges at 15, 45, 60, 120, 135 and
// 165 degrees). edge_tick() turns such an angle into a count of timing ticks,
// rounded to the nearest tick, with a half cycle of half_ticks ticks.
//
// Source thresholds follow the paper's status table: PV at or above 12 V,
// battery inside 10.1 V .. 13.8 V, grid or generator inside 220 V +/- 10 %
// (198 V .. 242 V), battery charging stops at 13.4 V. The fixed-point units
// (millivolts for DC, tenths of a volt RMS for AC) are this design's choice.
package spwm_pkg;

  // ---- source thresholds -------------------------------------------------
  localparam int unsigned PV_MIN_MV      = 12_000;  // PV "1" at 12 V or above
  localparam int unsigned BAT_MIN_MV     = 10_100;  // battery "1" from 10.1 V
  localparam int unsigned BAT_MAX_MV     = 13_800;  // ... up to 13.8 V
  localparam int unsigned BAT_CUTOFF_MV  = 13_400;  // charging cut-off
  localparam int unsigned AC_MIN_DV      = 1_980;   // 220 V - 10 %, in 0.1 V
  localparam int unsigned AC_MAX_DV      = 2_420;   // 220 V + 10 %, in 0.1 V

  // ---- operating modes (paper: charging, inverting, DG operation) --------
  typedef enum logic [1:0] {
    MODE_OFF    = 2'd0,  // no usable source: everything open
    MODE_CHARGE = 2'd1,  // grid feeds the load and charges the battery
    MODE_INVERT = 2'd2,  // battery (and PV) feed the load through the inverter
    MODE_DG     = 2'd3   // diesel generator feeds the load and charges
  } mode_t;

  // Logical status of the input sources (paper Table 2).
  typedef struct packed {
    logic pv_ok;     // PV at or above 12 V
    logic bat_ok;    // battery within 10.1 V .. 13.8 V
    logic bat_full;  // battery at or above the 13.4 V charge cut-off
    logic grid_ok;   // grid within 220 V +/- 10 %
    logic dg_ok;     // generator within 220 V +/- 10 %
  } src_status_t;

  // ---- pulse timing --------------------------------------------------------
  localparam real PI = 3.14159265358979323846;

  // Tick at which edge `falling` (0 = rising, 1 = falling) of pulse i
  // (0-based, 0..n-1) occurs within a half cycle of half_ticks ticks, for
  // n pulses per half cycle and voltage factor k_permil/1000.
  function automatic int unsigned edge_tick(int unsigned n, int unsigned k_permil,
                                            int unsigned half_ticks, int unsigned i,
                                            bit falling);
    real sector, centre, half_w, angle;
    sector = 180.0 / real'(n);                        // degrees per pulse
    centre = (real'(i) + 0.5) * sector;               // (2i-1)*180/2N, 1-based i
    half_w = (real'(k_permil) / 1000.0) * (sector / 2.0)
             * $sin((2.0 * real'(i) + 1.0) * PI / (2.0 * real'(n)));
    angle  = falling ? centre + half_w : centre - half_w;
    if (angle < 0.0)   angle = 0.0;
    if (angle > 180.0) angle = 180.0;
    return int'($floor(angle / 180.0 * real'(half_ticks) + 0.5));
  endfunction

endpackage

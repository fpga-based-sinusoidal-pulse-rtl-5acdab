// spwm_inverter_top: FPGA controller of a PV / battery / grid / generator
// home inverter.
//
// Structure:
//   tick_div -> spwm_seq -> gate_steer   sinusoidal PWM for the centre-tap
//                                        inverter (mss, pcs -> T1/T2 drive)
//   source_status -> mode_ctrl           source status and mode selection;
//                                        inverter runs only in INVERT mode
//   load_matrix_ctrl                     priority load switching
//   mppt                                 PV maximum power point reference
// The PWM path is the part the paper designs in detail (its FPGA listing
// for N = 3); the other blocks are built from its tables and descriptions.
// Analog parts stay outside: measurements arrive as numbers (mV for DC,
// 0.1 V RMS for AC, mA, W) and the outputs drive gate drivers, switches and
// contactors.
//
// Glue of this design's own: when mode_ctrl finds no usable source
// (MODE_OFF) the load matrix sees zero available power and sheds its loads
// one step at a time; otherwise it sees p_avail_w.
//
// Timing: every output is registered inside its block. gate_t1/gate_t2 lag
// mss/pcs by one clock. Reset is synchronous and active low.
module spwm_inverter_top #(
  parameter int unsigned CLK_HZ      = 50_000_000,  // board clock
  parameter int unsigned TICK_DIV    = 10,          // clocks per PWM tick
  parameter int unsigned F_OUT_HZ    = 50,          // output frequency
  parameter int unsigned N_PULSES    = 3,           // PWM pulses per half cycle
  parameter int unsigned K_PERMIL    = 1000,        // voltage factor K, 1/1000
  parameter int unsigned NUM_LOADS   = 3,           // loads in the load matrix
  parameter int unsigned LOAD_STEP_CYCLES = 50_000_000, // load matrix step, clocks
  localparam int unsigned IW = (NUM_LOADS > 1) ? $clog2(NUM_LOADS) : 1,
  localparam int unsigned SW = $clog2(2*N_PULSES+2)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // source measurements
  input  logic [15:0]           v_pv_mv,
  input  logic [15:0]           v_bat_mv,
  input  logic [11:0]           v_grid_dv,
  input  logic [11:0]           v_dg_dv,
  input  logic [15:0]           i_pv_ma,
  input  logic                  pv_sample,
  // load matrix settings
  input  logic [15:0]           p_avail_w,
  input  logic [15:0]           load_pw [NUM_LOADS],
  input  logic [IW-1:0]         load_prio [NUM_LOADS],
  // inverter drive
  output logic                  mss,
  output logic                  pcs,
  output logic [SW-1:0]         pwm_state,
  output logic                  gate_t1,
  output logic                  gate_t2,
  output logic signed [1:0]     out_level,
  output logic                  zero_cross,   // a new half cycle starts
  // source switching
  output spwm_pkg::mode_t       mode,
  output spwm_pkg::src_status_t status,
  output logic                  grid_sw,
  output logic                  dg_sw,
  output logic                  chg_en,
  // loads and PV regulator
  output logic [NUM_LOADS-1:0]  load_on,
  output logic [$clog2(NUM_LOADS+1)-1:0] loads_on_count,
  output logic [15:0]           pv_v_ref
);
  import spwm_pkg::*;

  logic tick, wave;
  logic inv_en;

  tick_div #(.DIV(TICK_DIV)) u_tick (
    .clk, .rst_n, .tick, .wave
  );

  spwm_seq #(
    .CLK_HZ(CLK_HZ), .TICK_DIV(TICK_DIV), .F_OUT_HZ(F_OUT_HZ),
    .N(N_PULSES), .K_PERMIL(K_PERMIL)
  ) u_seq (
    .clk, .rst_n, .tick, .mss, .pcs, .seg(pwm_state), .half_start(zero_cross)
  );

  gate_steer u_gate (
    .clk, .rst_n, .en(inv_en), .mss, .pcs,
    .gate_pos(gate_t1), .gate_neg(gate_t2), .level(out_level)
  );

  source_status u_status (
    .clk, .rst_n, .v_pv_mv, .v_bat_mv, .v_grid_dv, .v_dg_dv, .status
  );

  mode_ctrl u_mode (
    .clk, .rst_n, .status, .mode, .grid_sw, .dg_sw, .inv_en, .chg_en
  );

  logic [15:0] p_avail_eff;
  logic step, sw_on, sw_off;
  assign p_avail_eff = (mode == MODE_OFF) ? '0 : p_avail_w;

  load_matrix_ctrl #(
    .NUM_LOADS(NUM_LOADS), .PWR_W(16), .STEP_CYCLES(LOAD_STEP_CYCLES)
  ) u_loads (
    .clk, .rst_n, .p_avail(p_avail_eff), .load_pw, .prio(load_prio),
    .load_on, .n_on(loads_on_count), .step, .sw_on, .sw_off
  );

  logic dir_up;
  mppt u_mppt (
    .clk, .rst_n, .sample(pv_sample), .v_mv(v_pv_mv), .i_ma(i_pv_ma),
    .v_ref(pv_v_ref), .dir_up
  );

endmodule

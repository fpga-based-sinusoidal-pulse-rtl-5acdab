// source_status: logical status of the input energy sources.
//
// Compares the measured source voltages with the limits of the paper's
// status table and returns one bit per source:
//   pv_ok    PV voltage at or above 12 V
//   bat_ok   battery voltage within 10.1 V .. 13.8 V
//   bat_full battery at or above the 13.4 V charging cut-off
//   grid_ok  grid RMS voltage within 220 V +/- 10 % (198 V .. 242 V)
//   dg_ok    generator RMS voltage within the same window
// The limits are the paper's (kept in spwm_pkg). The measurement format is
// this design's choice, since the paper does not describe the sensing: DC
// voltages in millivolts, AC RMS voltages in tenths of a volt, each a plain
// unsigned number from an external converter.
//
// Timing: the status is registered, one clock after the inputs. Reset
// (synchronous, active low) reports every source as absent.
module source_status (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [15:0]               v_pv_mv,    // PV voltage, mV
  input  logic [15:0]               v_bat_mv,   // battery voltage, mV
  input  logic [11:0]               v_grid_dv,  // grid RMS voltage, 0.1 V
  input  logic [11:0]               v_dg_dv,    // generator RMS voltage, 0.1 V
  output spwm_pkg::src_status_t     status
);
  import spwm_pkg::*;

  function automatic logic ac_ok(logic [11:0] v);
    return (v >= 12'(AC_MIN_DV)) && (v <= 12'(AC_MAX_DV));
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      status <= '0;
    end else begin
      status.pv_ok    <= (v_pv_mv >= 16'(PV_MIN_MV));
      status.bat_ok   <= (v_bat_mv >= 16'(BAT_MIN_MV)) && (v_bat_mv <= 16'(BAT_MAX_MV));
      status.bat_full <= (v_bat_mv >= 16'(BAT_CUTOFF_MV));
      status.grid_ok  <= ac_ok(v_grid_dv);
      status.dg_ok    <= ac_ok(v_dg_dv);
    end
  end

endmodule
